// tb_prt_top_rf_lanes: the top built with the lane-type XOR block in its register
// file (RF_XOR_TYPE = 2, four one-bit lanes, q(z) = 1 + z + z^2 per bit) and small
// RAMs. One scan pi-iteration per trajectory (up, down) runs through the `rf_*`
// ports; the final RgScan state, the address chain output and every register are
// compared with a bit-wise model (x[t] = x[t-1] XOR x[t-2]). The RAM tests stay idle.
module tb_prt_top_rf_lanes;
  import prt_pkg::*;

  localparam int AW = 4, M = 4, K = 2, RF_AW = 5, R = 1 << RF_AW;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic start = 0; scheme_e scheme = SCHEME_RING; traj_e traj = TRAJ_UP;
  logic inv_in = 0, inv_out = 0;
  logic [K-1:0][M-1:0] seed = '0, expected = '0, final_state;
  logic busy, done, pass;
  logic [2*M-1:0] signature;
  logic cmp_init = 0; logic [AW-1:0] last_pos = '1; logic [K-1:0][M-1:0] coef = '0;
  logic mem_en = 0, mem_rw = 0; logic [AW-1:0] mem_a = '0; logic [M-1:0] mem_d = '0, mem_q;

  logic tp_start = 0, tp_down = 0, tp_inv_in = 0, tp_inv_out = 0;
  logic [1:0][M-1:0] tp_seed = '0, tp_expected = '0, tp_final_state;
  logic tp_busy, tp_done, tp_pass;
  logic tpa_ld = 0, tpa_cnt = 0, tpa_en = 0, tpa_we = 0;
  logic tpb_ld = 0, tpb_cnt = 0, tpb_en = 0, tpb_we = 0;
  logic [AW-1:0] tpa_addr = '0, tpb_addr = '0;
  logic [M-1:0] tpa_din = '0, tpb_din = '0, tpa_dout, tpb_dout;

  logic rf_test_mode = 0, rf_wr_en = 0, rf_rd_en = 0, rf_addr_shift = 0, rf_scan_load = 0;
  logic [RF_AW-1:0] rf_wr_addr = '0, rf_rd_addr = '0, rf_addr_in = '0, rf_addr_out;
  logic [M-1:0] rf_din = '0, rf_dout;
  logic [1:0][M-1:0] rf_scan_seed = '0, rf_scan_state;

  prt_top #(.AW(AW), .TP_AW(AW), .RF_AW(RF_AW), .RF_XOR_TYPE(2), .RF_LM(1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rf_step();
    @(negedge clk);
    rf_wr_en = 0; rf_rd_en = 0; rf_addr_shift = 0; rf_scan_load = 0;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int unsigned A [R];
    int unsigned x [R];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int tr = 0; tr < 2; tr++) begin
      for (int t = 0; t < R; t++) A[t] = (tr == 0) ? t : R - 1 - t;
      x[0] = 4'h5 + tr; x[1] = 4'hC - tr;
      for (int t = 2; t < R; t++) x[t] = x[t-1] ^ x[t-2];
      rf_test_mode = 0;
      rf_wr_en = 1; rf_wr_addr = RF_AW'(A[0]); rf_din = M'(x[0]); rf_step();
      rf_wr_en = 1; rf_wr_addr = RF_AW'(A[1]); rf_din = M'(x[1]); rf_step();
      rf_test_mode = 1;
      rf_scan_load = 1; rf_scan_seed = {4'h0, M'(x[0])}; rf_step();
      rf_addr_shift = 1; rf_addr_in = RF_AW'(A[1]); rf_step();
      for (int t = 2; t < R; t++) begin
        rf_addr_shift = 1; rf_addr_in = RF_AW'(A[t]); rf_step();
        check(rf_addr_out == RF_AW'(A[t-1]), "address chain");
        rf_rd_en = 1; rf_step();
        rf_wr_en = 1; rf_step();
      end
      rf_addr_shift = 1; rf_addr_in = '0; rf_step();
      rf_rd_en = 1; rf_step();
      check(rf_scan_state == {M'(x[R-2]), M'(x[R-1])}, "final RgScan state");
      rf_test_mode = 0;
      for (int t = 0; t < R; t++) begin
        rf_rd_addr = RF_AW'(A[t]); #1;
        check(rf_dout == M'(x[t]), "register contents");
      end
    end
    check(!busy && !tp_busy, "RAM tests idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
