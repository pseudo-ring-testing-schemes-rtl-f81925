// glfsr_feedback_prog: XOR block with run-time coefficients.
//
// Same function as glfsr_feedback, y = XOR over j of coef[j]*stage[j] in GF(2^M),
// but the coefficients of q(z) are inputs, so the LFSR structure can change from
// one pi-iteration to the next. Costs K general GF(2^M) multipliers instead of
// constant ones. stage[0] is the most recent cell. Combinational.
module glfsr_feedback_prog #(
  parameter int unsigned K = 2,
  parameter int unsigned M = 4,
  parameter logic [M-1:0] P = M'(4'b0011)
) (
  input  logic [K-1:0][M-1:0] stage,
  input  logic [K-1:0][M-1:0] coef,
  output logic [M-1:0]        y
);

  logic [K-1:0][M-1:0] prod;

  for (genvar j = 0; j < K; j++) begin : g_mul
    gf_mul #(.M(M), .P(P)) u_mul (
      .a(stage[j]),
      .b(coef[j]),
      .y(prod[j])
    );
  end

  always_comb begin
    y = '0;
    for (int j = 0; j < K; j++) y = y ^ prod[j];
  end

endmodule
