// tb_prt_top: end-to-end test of the whole block at its default sizes (2048-cell
// single-port and two-port RAMs, 32-word register file, GF(2^4)).
//  * single-port RAM: a pi-iteration for each scheme (ring, scan), trajectory (up,
//    down, pseudorandom) and inversion setting (none, input, output, both); final
//    state, pass flag and signature against an independent model; then the RAM is
//    read through the ordinary port (test multiplexer released) and compared with
//    the model's contents; a wrong expected value must give pass = 0; a shortened
//    iteration of 4 periods must end in its seed (Init = Fin comparison).
//  * two-port RAM: pi-iterations up and down, then an ordinary-port read-back.
//  * register file: ordinary write/read, then a pi-iteration through its chains.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_prt_top;
  import prt_pkg::*;
  import tb_gf_pkg::*;

  localparam int AW = 11, M = 4, K = 2, N = 1 << AW, RF_AW = 5, R = 1 << RF_AW;

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

  prt_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_ring, n_scan, n_up, n_down, n_pseudo, n_inv_in, n_inv_out, n_inv_both;
  int n_init_fin = 0;
  int n_pass, n_fail_flag, n_sig, n_mux_read, n_tp_up, n_tp_down, n_tp_mux, n_rf_norm, n_rf_test;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  int unsigned A [N], x [N], y [N];
  int unsigned sa_l, sa_m;

  function automatic void sa_push(int unsigned d);
    int unsigned nl = sa_l ^ gf_mul(9, sa_m, 4, 'h13) ^ d;
    sa_m = sa_l; sa_l = nl;
  endfunction

  task automatic model(int sch, int tr, bit ii, bit io, int unsigned s_old, int unsigned s_new, int n);
    int unsigned flip = (ii ^ io) ? 'hF : 0;
    A[0] = (tr == 1) ? n - 1 : 0;
    for (int t = 1; t < n; t++)
      A[t] = (tr == 0) ? A[t-1] + 1 : (tr == 1) ? A[t-1] - 1 : lfsr_next(A[t-1], AW, taps_of(AW));
    x[0] = s_old; x[1] = s_new;
    for (int t = 0; t < n; t++) begin
      if (t >= 2) x[t] = gf_mul(2, y[t-1], 4, 'h13) ^ gf_mul(2, y[t-2], 4, 'h13);
      y[t] = x[t] ^ flip;
    end
    sa_l = 0; sa_m = 0;
    if (sch == 0) for (int t = 0; t < n; t++) sa_push(y[t]);
    else begin
      for (int t = 2; t < n; t++) begin sa_push(y[t-2]); sa_push(y[t-1]); end
      sa_push(y[n-2]); sa_push(y[n-1]);
    end
  endtask

  task automatic rf_step();
    @(negedge clk);
    rf_wr_en = 0; rf_rd_en = 0; rf_addr_shift = 0; rf_scan_load = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ------------------------------------------------ single-port RAM
    for (int sch = 0; sch < 2; sch++)
      for (int tr = 0; tr < 3; tr++)
        for (int inv = 0; inv < 4; inv++) begin
          @(negedge clk);
          seed = {4'($urandom), 4'($urandom)};
          model(sch, tr, inv[0], inv[1], seed[1], seed[0], N);
          scheme = scheme_e'(sch); traj = traj_e'(tr); inv_in = inv[0]; inv_out = inv[1];
          expected = {4'(y[N-2]), 4'(y[N-1])};
          start = 1;
          @(negedge clk); start = 0;
          while (!done) @(negedge clk);
          check(pass && final_state == expected, $sformatf("sp final sch %0d tr %0d inv %0d", sch, tr, inv));
          check(signature == 8'({sa_m[3:0], sa_l[3:0]}), "sp signature");
          if (pass) n_pass++;
          if (signature == 8'({sa_m[3:0], sa_l[3:0]})) n_sig++;
          if (sch == 0) n_ring++; else n_scan++;
          if (tr == 0) n_up++; else if (tr == 1) n_down++; else n_pseudo++;
          if (inv == 1) n_inv_in++; else if (inv == 2) n_inv_out++; else if (inv == 3) n_inv_both++;
          // ordinary port: read a few cells back through the test multiplexer
          for (int n = 0; n < 8; n++) begin
            automatic int t = $urandom % N;
            mem_en = 1; mem_rw = 0; mem_a = AW'(A[t]);
            @(negedge clk); mem_en = 0;
            check(mem_q == 4'(x[t] ^ (inv[0] ? 'hF : 0)), "sp ordinary read");
            n_mux_read++;
          end
        end
    // wrong expected value
    @(negedge clk);
    seed = {4'h0, 4'h1}; model(0, 0, 0, 0, 0, 1, N);
    scheme = SCHEME_RING; traj = TRAJ_UP; inv_in = 0; inv_out = 0;
    expected = {4'(y[N-2]), 4'(y[N-1] ^ 2)}; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(!pass, "wrong expected accepted");
    if (!pass) n_fail_flag++;
    // Init = Fin: 1022 cells = 1020 shifts = 4 periods of 255, compared with the seed
    @(negedge clk);
    seed = {4'h7, 4'h3}; last_pos = AW'(1021); cmp_init = 1; expected = '0;
    scheme = SCHEME_SCAN; traj = TRAJ_PSEUDO; inv_in = 1; inv_out = 1; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(pass && final_state == seed, "Init = Fin");
    if (pass) n_init_fin++;
    cmp_init = 0; last_pos = '1;
    // ------------------------------------------------ two-port RAM
    for (int run = 0; run < 4; run++) begin
      @(negedge clk);
      tp_seed = {4'($urandom), 4'($urandom)};
      model(0, run[0], run[1], run[1], tp_seed[1], tp_seed[0], N);
      tp_down = run[0]; tp_inv_in = run[1]; tp_inv_out = run[1];
      tp_expected = {4'(y[N-2]), 4'(y[N-1])};
      tp_start = 1;
      @(negedge clk); tp_start = 0;
      while (!tp_done) @(negedge clk);
      check(tp_pass && tp_final_state == tp_expected, $sformatf("tp final run %0d", run));
      if (tp_pass) begin if (run[0]) n_tp_down++; else n_tp_up++; end
      for (int n = 0; n < 8; n++) begin
        automatic int t = $urandom % N;
        tpa_ld = 1; tpa_addr = AW'(run[0] ? N - 1 - t : t);
        @(negedge clk); tpa_ld = 0; tpa_en = 1;
        @(negedge clk); tpa_en = 0;
        check(tpa_dout == 4'(x[t] ^ (run[1] ? 'hF : 0)), "tp ordinary read");
        n_tp_mux++;
      end
    end
    // ------------------------------------------------ register file
    for (int i = 0; i < R; i++) begin
      rf_wr_en = 1; rf_wr_addr = RF_AW'(i); rf_din = M'(i * 7); rf_step();
    end
    for (int i = 0; i < R; i++) begin
      rf_rd_addr = RF_AW'(i); #1;
      check(rf_dout == M'(i * 7), "rf ordinary read"); n_rf_norm++;
    end
    begin
      automatic int unsigned xr [R];
      xr[0] = 4'hA; xr[1] = 4'h5;
      for (int t = 2; t < R; t++) xr[t] = gf_mul(2, xr[t-1], 4, 'h13) ^ gf_mul(2, xr[t-2], 4, 'h13);
      rf_wr_en = 1; rf_wr_addr = 0; rf_din = M'(xr[0]); rf_step();
      rf_wr_en = 1; rf_wr_addr = 1; rf_din = M'(xr[1]); rf_step();
      rf_test_mode = 1;
      rf_scan_load = 1; rf_scan_seed = {4'h0, M'(xr[0])}; rf_step();
      rf_addr_shift = 1; rf_addr_in = 1; rf_step();
      for (int t = 2; t < R; t++) begin
        rf_addr_shift = 1; rf_addr_in = RF_AW'(t); rf_step();
        rf_rd_en = 1; rf_step();
        rf_wr_en = 1; rf_step();
      end
      rf_addr_shift = 1; rf_addr_in = '0; rf_step();
      rf_rd_en = 1; rf_step();
      check(rf_scan_state == {M'(xr[R-2]), M'(xr[R-1])}, "rf final state");
      if (rf_scan_state == {M'(xr[R-2]), M'(xr[R-1])}) n_rf_test++;
      rf_test_mode = 0;
    end
    // ------------------------------------------------ every mechanism seen
    $display("ring %0d scan %0d up %0d down %0d pseudo %0d inv_in %0d inv_out %0d inv_both %0d",
             n_ring, n_scan, n_up, n_down, n_pseudo, n_inv_in, n_inv_out, n_inv_both);
    $display("init_fin %0d", n_init_fin);
    $display("pass %0d fail_flag %0d signature %0d sp_port %0d tp_up %0d tp_down %0d tp_port %0d rf_port %0d rf_test %0d",
             n_pass, n_fail_flag, n_sig, n_mux_read, n_tp_up, n_tp_down, n_tp_mux, n_rf_norm, n_rf_test);
    check(n_ring > 0 && n_scan > 0, "both schemes");
    check(n_up > 0 && n_down > 0 && n_pseudo > 0, "all trajectories");
    check(n_inv_in > 0 && n_inv_out > 0 && n_inv_both > 0, "all inversions");
    check(n_pass > 0 && n_fail_flag > 0 && n_sig > 0, "pass, fail, signature");
    check(n_init_fin > 0, "Init = Fin comparison");
    check(n_mux_read > 0 && n_tp_mux > 0 && n_rf_norm > 0, "ordinary ports");
    check(n_tp_up > 0 && n_tp_down > 0 && n_rf_test > 0, "two-port and register file tests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
