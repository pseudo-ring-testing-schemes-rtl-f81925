// tb_glfsr_feedback_lanes: the lane-type XOR block, checked exhaustively over all
// 256 pairs of 4-bit stages.
//  * four one-bit lanes, q(z) = 1 + z + z^2 over GF(2): y = stage0 XOR stage1.
//  * two GF(4) lanes (p(x) = 1 + x + x^2): the low lane with 1 + z + 2z^2, the high
//    lane with 1 + z + 3z^2, against the reference multiplier.
module tb_glfsr_feedback_lanes;
  import tb_gf_pkg::*;

  int checks = 0, failures = 0;
  logic [1:0][3:0] st;
  logic [3:0] y1, y2;

  glfsr_feedback_lanes #(.K(2), .M(4), .LM(1)) dut1 (.stage(st), .y(y1));
  glfsr_feedback_lanes #(.K(2), .M(4), .LM(2), .LP(2'b11), .LCOEF(8'b11_01_10_01)) dut2 (
    .stage(st), .y(y2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s1 = 0; s1 < 16; s1++)
      for (int s0 = 0; s0 < 16; s0++) begin
        automatic int unsigned r2;
        st[1] = 4'(s1); st[0] = 4'(s0);
        #1;
        checks++;
        if (y1 != 4'(s0 ^ s1)) begin
          failures++; $display("FAIL one-bit lanes %h %h -> %h", s1, s0, y1);
        end
        r2 = (s0 & 3) ^ gf_mul(2, s1 & 3, 2, 'h7)
           ^ ((((s0 >> 2) & 3) ^ gf_mul(3, (s1 >> 2) & 3, 2, 'h7)) << 2);
        checks++;
        if (y2 != 4'(r2)) begin
          failures++; $display("FAIL GF(4) lanes %h %h -> %h, ref %h", s1, s0, y2, r2);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
