// tb_gf_mul_const: exhaustive check of the constant multiplier over GF(2^4),
// p(x) = 1 + x + x^4, for all 16 constants and all 16 inputs, plus GF(2) (M = 1).
// Also checks the general (run-time) multiplier gf_mul on all 256 input pairs.
module tb_gf_mul_const;
  import tb_gf_pkg::*;

  int checks = 0, failures = 0;
  logic [3:0]  a;
  logic [15:0][3:0] y;
  logic        a1;
  logic [1:0]  y1;

  for (genvar c = 0; c < 16; c++) begin : g_c
    gf_mul_const #(.M(4), .P(4'b0011), .C(4'(c))) dut (.a(a), .y(y[c]));
  end
  logic [3:0] gb, gy;
  gf_mul #(.M(4), .P(4'b0011)) dut_gen (.a(a), .b(gb), .y(gy));
  gf_mul_const #(.M(1), .P(1'b1), .C(1'b0)) dut_b0 (.a(a1), .y(y1[0]));
  gf_mul_const #(.M(1), .P(1'b1), .C(1'b1)) dut_b1 (.a(a1), .y(y1[1]));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      a = 4'(i);
      #1;
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (y[c] != 4'(gf_mul(i, c, 4, 'h13))) begin
          failures++;
          $display("FAIL %0d*%0d = %0d, expected %0d", c, i, y[c], gf_mul(i, c, 4, 'h13));
        end
      end
    end
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a = 4'(i); gb = 4'(j); #1;
        checks++;
        if (gy != 4'(gf_mul(i, j, 4, 'h13))) failures++;
      end
    // Worked example of the paper: 2*2 = 4, 2*6 = C, 9*2 = 1.
    a = 4'h6; #1; checks++; if (y[2] != 4'hC) failures++;
    a = 4'h2; #1; checks++; if (y[9] != 4'h1) failures++;
    for (int i = 0; i < 2; i++) begin
      a1 = 1'(i); #1;
      checks += 2;
      if (y1[0] != 1'b0) failures++;
      if (y1[1] != 1'(i)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
