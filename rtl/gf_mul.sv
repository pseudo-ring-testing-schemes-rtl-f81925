// gf_mul: general multiplier of two elements of GF(2^M), modulo p(x).
//
// Combinational. Used where the feedback polynomial is chosen at run time, so the
// coefficient is a signal rather than a constant. Shift-and-add from the top bit of
// `b` down: multiply the partial product by x (reducing with p(x)) and add `a` for
// every set bit. P holds the low M bits of p(x); default GF(2^4), p(x) = 1 + x + x^4.
module gf_mul #(
  parameter int unsigned M = 4,
  parameter logic [M-1:0] P = M'(4'b0011)
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic [M-1:0] y
);

  always_comb begin
    y = '0;
    for (int i = M - 1; i >= 0; i--) begin
      y = (y[M-1]) ? ((y << 1) ^ P) : (y << 1);
      if (b[i]) y = y ^ a;
    end
  end

endmodule
