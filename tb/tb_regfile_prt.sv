// tb_regfile_prt: the register file with its scan pi-test (32 x 4, q(z) = 1 + 2z +
// 2z^2). Ordinary writes and reads first; then pi-iterations driven through the
// address and data chains along an up, a down and a random trajectory: seed the
// first two registers through the ordinary port, load RgScan, and per shift step the
// address chain, read (RdEn) and write (WrEn). The final RgScan contents, every
// register and the address chain output are compared with an independent model.
// Three files run on the same stimulus: the GLFSR XOR block (dut), four one-bit
// LFSR lanes with q(z) = 1 + z + z^2 over GF(2) (dut2), and two GF(4) lanes with
// different coefficients, 1 + z + 2z^2 and 1 + z + 3z^2 (dut3).
module tb_regfile_prt;
  import tb_gf_pkg::*;

  localparam int RAW = 5, M = 4, R = 1 << RAW;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, test_mode = 0;
  logic [RAW-1:0] wr_addr = '0, rd_addr = '0, addr_in = '0;
  logic [2:0][RAW-1:0] ao;
  logic [M-1:0] din = '0;
  logic [2:0][M-1:0] dq;
  logic wr_en = 0, rd_en = 0, addr_shift = 0, scan_load = 0;
  logic [1:0][M-1:0] scan_seed = '0;
  logic [2:0][1:0][M-1:0] ss;
  logic [M-1:0] model [R];

  regfile_prt #(.RAW(RAW), .M(M)) dut (.*, .dout(dq[0]), .addr_out(ao[0]), .scan_state(ss[0]));
  regfile_prt #(.RAW(RAW), .M(M), .XOR_TYPE(2), .LM(1)) dut2 (
    .*, .dout(dq[1]), .addr_out(ao[1]), .scan_state(ss[1]));
  regfile_prt #(.RAW(RAW), .M(M), .XOR_TYPE(2), .LM(2), .LP(2'b11),
                .LCOEF(8'b11_01_10_01)) dut3 (
    .*, .dout(dq[2]), .addr_out(ao[2]), .scan_state(ss[2]));

  // next value of each kind of XOR block from the two previous values
  function automatic int unsigned nxt(int d, int unsigned a1, int unsigned a2);
    if (d == 0) return gf_mul(2, a1, 4, 'h13) ^ gf_mul(2, a2, 4, 'h13);
    if (d == 1) return a1 ^ a2;
    return (a1 & 3) ^ gf_mul(2, a2 & 3, 2, 'h7)
         ^ (((a1 >> 2) & 3) << 2) ^ (gf_mul(3, (a2 >> 2) & 3, 2, 'h7) << 2);
  endfunction

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clk1();
    @(negedge clk);
    wr_en = 0; rd_en = 0; addr_shift = 0; scan_load = 0;
  endtask

  initial begin
    int unsigned A [R];
    int unsigned x [3][R];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // ordinary mode
    for (int i = 0; i < R; i++) begin
      wr_en = 1; wr_addr = RAW'(i); din = M'($urandom); model[i] = din; clk1();
    end
    for (int i = 0; i < R; i++) begin
      rd_addr = RAW'(i); #1;
      for (int d = 0; d < 3; d++) begin
        checks++; if (dq[d] != model[i]) begin failures++; $display("FAIL ordinary read %0d", i); end
      end
    end
    for (int tr = 0; tr < 3; tr++) begin
      // trajectory
      for (int t = 0; t < R; t++) A[t] = (tr == 0) ? t : (tr == 1) ? R - 1 - t : t;
      if (tr == 2) for (int t = R - 1; t > 0; t--) begin
        automatic int j = $urandom % (t + 1);
        automatic int unsigned tmp = A[t]; A[t] = A[j]; A[j] = tmp;
      end
      x[0][0] = $urandom % 16; x[0][1] = $urandom % 16;
      for (int d = 0; d < 3; d++) begin
        x[d][0] = x[0][0]; x[d][1] = x[0][1];
        for (int t = 2; t < R; t++) x[d][t] = nxt(d, x[d][t-1], x[d][t-2]);
      end
      // initialisation: seed cells through the ordinary port, RgScan stage 0 = x0
      test_mode = 0;
      wr_en = 1; wr_addr = RAW'(A[0]); din = M'(x[0][0]); clk1();
      wr_en = 1; wr_addr = RAW'(A[1]); din = M'(x[0][1]); clk1();
      test_mode = 1;
      scan_load = 1; scan_seed = {4'h0, M'(x[0][0])}; clk1();
      addr_shift = 1; addr_in = RAW'(A[1]); clk1();
      // pushing
      for (int t = 2; t < R; t++) begin
        addr_shift = 1; addr_in = RAW'(A[t]); clk1();     // WrAddr = A(t), RdAddr = A(t-1)
        for (int d = 0; d < 3; d++) begin
          checks++; if (ao[d] != RAW'(A[t-1])) failures++;
        end
        rd_en = 1; clk1();                                // RgScan = (x[t-1], x[t-2])
        wr_en = 1; clk1();                                // register A(t) = x[t]
      end
      // unloading
      addr_shift = 1; addr_in = '0; clk1();
      rd_en = 1; clk1();
      for (int d = 0; d < 3; d++) begin
        checks++;
        if (ss[d] != {M'(x[d][R-2]), M'(x[d][R-1])}) begin
          failures++; $display("FAIL dut %0d tr %0d final %h", d, tr, ss[d]);
        end
      end
      test_mode = 0;
      for (int t = 0; t < R; t++) begin
        rd_addr = RAW'(A[t]); #1;
        for (int d = 0; d < 3; d++) begin
          checks++;
          if (dq[d] != M'(x[d][t])) begin failures++; $display("FAIL dut %0d tr %0d reg %0d", d, tr, A[t]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
