// gf_mul_const: multiply an element of GF(2^M) by the constant C, modulo p(x).
//
// Purely combinational shift-and-add (Horner) multiplier: for every set bit of C the
// input is added, and between bits the partial product is multiplied by x and reduced
// by p(x). Because C is a parameter, synthesis folds it into a small XOR network, the
// "not costly" constant multiplier the pi-test feedback needs. P holds the low M bits
// of p(x) (the x^M term is implicit); the defaults give GF(2^4) with p(x) = 1 + x + x^4.
// With M = 1 and P = 1 the module degenerates to GF(2), where C is 0 or 1.
module gf_mul_const #(
  parameter int unsigned M = 4,
  parameter logic [M-1:0] P = M'(4'b0011),
  parameter logic [M-1:0] C = M'(4'h2)
) (
  input  logic [M-1:0] a,
  output logic [M-1:0] y
);

  // Multiply by x modulo p(x).
  function automatic logic [M-1:0] xtime(input logic [M-1:0] v);
    logic [M-1:0] s;
    s = v << 1;
    if (v[M-1]) s = s ^ P;
    return s;
  endfunction

  always_comb begin
    y = '0;
    for (int i = M - 1; i >= 0; i--) begin
      y = xtime(y);
      if (C[i]) y = y ^ a;
    end
  end

endmodule
