// signature_analyzer: two-stage GLFSR signature register over GF(2^M).
//
// Compacts the stream of words read from the RAM (the Signature Analyzer of the ring
// scheme, which catches faults the virtual LFSR may "omit"). It follows the checksum
// algorithm given for the microcontroller program memory: on every accepted word
//   MSW <= LSW
//   LSW <= CL*LSW XOR CM*MSW XOR din      (sum modulo q(z), then XOR the new word)
// with q(z) = 1 + z + 9z^2 over GF(2^4), p(x) = 1 + x + x^4, i.e. CL = 1, CM = 9 by
// default. `clear` loads the seed (0 by default, as the program clears its register).
// One word per clock when `en` is high; `sig` = {MSW, LSW} is valid the next clock.
module signature_analyzer #(
  parameter int unsigned M = 4,
  parameter logic [M-1:0] P = M'(4'b0011),
  parameter logic [M-1:0] CL = M'(4'h1),
  parameter logic [M-1:0] CM = M'(4'h9)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic [2*M-1:0] seed,
  input  logic           en,
  input  logic [M-1:0]   din,
  output logic [2*M-1:0] sig
);

  logic [1:0][M-1:0] st;      // st[0] = LSW (z), st[1] = MSW (z^2)
  logic [M-1:0]      fb;

  glfsr_feedback #(.K(2), .M(M), .P(P), .COEF({CM, CL})) u_fb (
    .stage(st),
    .y    (fb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= '0;
    end else if (clear) begin
      st <= seed;
    end else if (en) begin
      st[1] <= st[0];
      st[0] <= fb ^ din;
    end
  end

  assign sig = st;

endmodule
