// glfsr_feedback: the XOR block of the pseudo-ring schemes.
//
// Computes the next value of a K-stage generalised LFSR over GF(2^M):
//   y = COEF[0]*stage[0] XOR COEF[1]*stage[1] XOR ... XOR COEF[K-1]*stage[K-1]
// where stage[0] is the most recently produced cell and the products are taken
// modulo p(x). This is "the sum modulo q(z)" of the virtual register's stages. With
// the defaults (GF(2^4), q(z) = 1 + 2z + 2z^2) the next cell is 2*r(i) XOR 2*r(i+1),
// the paper's two-port example. Combinational, no clock.
module glfsr_feedback #(
  parameter int unsigned K = 2,
  parameter int unsigned M = 4,
  parameter logic [M-1:0] P = M'(4'b0011),
  parameter logic [K*M-1:0] COEF = (K*M)'({4'h2, 4'h2})
) (
  input  logic [K-1:0][M-1:0] stage,
  output logic [M-1:0]        y
);

  logic [K-1:0][M-1:0] prod;

  for (genvar j = 0; j < K; j++) begin : g_mul
    gf_mul_const #(.M(M), .P(P), .C(COEF[j*M +: M])) u_mul (
      .a(stage[j]),
      .y(prod[j])
    );
  end

  always_comb begin
    y = '0;
    for (int j = 0; j < K; j++) y = y ^ prod[j];
  end

endmodule
