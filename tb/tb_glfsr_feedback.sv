// tb_glfsr_feedback: checks the XOR block for both polynomials of the design.
//  * q(z) = 1 + z + 9z^2: all 256 stage pairs against the sum table printed for the
//    microcontroller example (fig4_table.hex, row = z^2 stage, column = z stage).
//  * q(z) = 1 + 2z + 2z^2: the virtual GLFSR sequence from (0, 1) starts
//    0, 1, 2, 6, 8, F, E and returns to (0, 1) after exactly 255 shifts.
//  * the run-time variant glfsr_feedback_prog with coef = {9, 1} against the same
//    table, and with random coefficients against the reference multiplier.
module tb_glfsr_feedback;
  import tb_gf_pkg::*;

  int checks = 0, failures = 0;
  logic [3:0] table_q [256];
  logic [1:0][3:0] st_a, st_b;
  logic [3:0] y_a, y_b, y_p;
  logic [1:0][3:0] st_p, coef_p;
  glfsr_feedback_prog #(.K(2), .M(4), .P(4'b0011)) dut_p (.stage(st_p), .coef(coef_p), .y(y_p));

  glfsr_feedback #(.K(2), .M(4), .P(4'b0011), .COEF({4'h9, 4'h1})) dut_a (.stage(st_a), .y(y_a));
  glfsr_feedback #(.K(2), .M(4), .P(4'b0011), .COEF({4'h2, 4'h2})) dut_b (.stage(st_b), .y(y_b));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] s0, s1;
    int period;
    period = 0;
    $readmemh("tb/fig4_table.hex", table_q);
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) begin
        st_a[1] = 4'(r); st_a[0] = 4'(c);
        #1;
        checks++;
        if (y_a != table_q[16 * r + c]) begin
          failures++;
          $display("FAIL z^2=%0d z=%0d: %0d, table %0d", r, c, y_a, table_q[16 * r + c]);
        end
        st_b[1] = 4'(r); st_b[0] = 4'(c);
        #1;
        checks++;
        if (y_b != 4'(gf_mul(2, r, 4, 'h13) ^ gf_mul(2, c, 4, 'h13))) failures++;
      end
    for (int n = 0; n < 512; n++) begin
      st_p = {4'($urandom), 4'($urandom)};
      coef_p = (n < 256) ? {4'h9, 4'h1} : {4'($urandom), 4'($urandom)};
      #1;
      checks++;
      if (n < 256 && y_p != table_q[{st_p[1], st_p[0]}]) failures++;
      if (y_p != 4'(gf_mul(coef_p[0], st_p[0], 4, 'h13) ^ gf_mul(coef_p[1], st_p[1], 4, 'h13))) failures++;
    end
    // sequence and period of the two-port example
    s1 = 4'h0; s0 = 4'h1; period = 0;
    begin : walk
      int exp_seq[5] = '{2, 6, 8, 15, 14};
      for (int n = 0; n < 300; n++) begin
        st_b[1] = s1; st_b[0] = s0;
        #1;
        if (n < 5) begin
          checks++;
          if (y_b != 4'(exp_seq[n])) begin
            failures++;
            $display("FAIL sequence item %0d = %h", n + 2, y_b);
          end
        end
        s1 = s0; s0 = y_b;
        if (period == 0 && s1 == 4'h0 && s0 == 4'h1) period = n + 1;
      end
    end
    checks++;
    if (period != 255) begin failures++; $display("FAIL period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
