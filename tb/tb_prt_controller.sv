// tb_prt_controller: pi-iterations on a 2048 x 4 RAM (the defaults) with GenA and
// the signature analyzer, for both schemes, all three trajectories and all four
// inversion settings. An independent model gives the expected final state, the
// memory contents after the iteration, the read stream into the signature analyzer
// and the exact number of clocks. Then a stuck-at fault is injected into one cell
// (chosen so that it is excited) and the iteration must report a failure, and a
// wrong `expected` must be reported too.
module tb_prt_controller;
  import prt_pkg::*;
  import tb_gf_pkg::*;

  localparam int AW = 11, M = 4, K = 2, N = 1 << AW;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  scheme_e scheme;
  traj_e   traj;
  logic inv_in = 0, inv_out = 0;
  logic [K-1:0][M-1:0] seed, expected, final_state;
  logic busy, done, pass;
  logic ag_start, ag_step, ag_last;
  logic [AW-1:0] ag_addr, ag_pos;
  logic ram_en, ram_rw;
  logic [AW-1:0] ram_a;
  logic [M-1:0] ram_d, ram_q;
  logic rd_valid;
  logic [M-1:0] rd_data;
  logic [7:0] sig;
  logic stuck_en = 0, stuck_val = 0;
  logic [AW-1:0] stuck_addr = '0;
  logic [2:0] stuck_bit = '0;

  logic cmp_init = 0;
  logic [AW-1:0] last_pos = '1;
  logic [K-1:0][M-1:0] coef = '0;
  prt_controller #(.AW(AW), .M(M), .K(K)) dut (.*);
  addr_gen #(.AW(AW)) u_gena (.clk, .rst_n, .start(ag_start), .step(ag_step), .mode(traj),
                              .addr(ag_addr), .pos(ag_pos), .last(ag_last));
  fault_ram #(.AW(AW), .M(M)) u_ram (.clk, .en(ram_en), .rw(ram_rw), .a(ram_a), .d(ram_d),
                                     .q(ram_q), .stuck_en, .stuck_addr, .stuck_bit, .stuck_val);
  signature_analyzer u_sa (.clk, .rst_n, .clear(ag_start), .seed(8'h00), .en(rd_valid),
                           .din(rd_data), .sig(sig));

  // second controller with a run-time polynomial (PROG_POLY = 1)
  logic start2 = 0, busy2, done2, pass2;
  logic [K-1:0][M-1:0] final2;
  logic ag2_start, ag2_step, ag2_last, r2_en, r2_rw, rd2_valid;
  logic [AW-1:0] ag2_addr, ag2_pos, r2_a;
  logic [M-1:0] r2_d, r2_q, rd2_data;
  prt_controller #(.AW(AW), .M(M), .K(K), .PROG_POLY(1'b1)) dut2 (
    .clk, .rst_n, .start(start2), .scheme, .inv_in, .inv_out, .seed, .expected, .cmp_init,
    .last_pos, .coef, .busy(busy2), .done(done2), .pass(pass2), .final_state(final2),
    .ag_start(ag2_start), .ag_step(ag2_step), .ag_addr(ag2_addr),
    .ram_en(r2_en), .ram_rw(r2_rw), .ram_a(r2_a), .ram_d(r2_d), .ram_q(r2_q),
    .rd_valid(rd2_valid), .rd_data(rd2_data));
  addr_gen #(.AW(AW)) u_gena2 (.clk, .rst_n, .start(ag2_start), .step(ag2_step), .mode(traj),
                               .addr(ag2_addr), .pos(ag2_pos), .last(ag2_last));
  sp_ram #(.AW(AW), .M(M)) u_ram2 (.clk, .en(r2_en), .rw(r2_rw), .a(r2_a), .d(r2_d), .q(r2_q));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  int unsigned A [N];
  int unsigned x [N];      // logical value of the virtual GLFSR at position t
  int unsigned y [N];      // value read back (after both inversions)
  int unsigned sa_l, sa_m;

  function automatic void sa_push(int unsigned d);
    int unsigned nl = sa_l ^ gf_mul(9, sa_m, 4, 'h13) ^ d;
    sa_m = sa_l; sa_l = nl;
  endfunction

  int unsigned c0 = 2, c1 = 2;     // q(z) coefficients of stage 0 and stage 1
  int unsigned nlen = N;           // cells in the iteration

  task automatic build_model(int sch, int tr, bit ii, bit io, int unsigned s0, int unsigned s1);
    int N = nlen;
    int unsigned flip = (ii ^ io) ? 'hF : 0;
    A[0] = (tr == 1) ? N - 1 : 0;
    for (int t = 1; t < N; t++)
      A[t] = (tr == 0) ? A[t-1] + 1 : (tr == 1) ? A[t-1] - 1 : lfsr_next(A[t-1], AW, taps_of(AW));
    x[0] = s1; x[1] = s0;             // seed[1] is the oldest stage, written first
    for (int t = 0; t < N; t++) begin
      if (t >= K) x[t] = gf_mul(c0, y[t-1], 4, 'h13) ^ gf_mul(c1, y[t-2], 4, 'h13);
      y[t] = x[t] ^ flip;
    end
    sa_l = 0; sa_m = 0;
    if (sch == 0) begin
      for (int t = 0; t < N; t++) sa_push(y[t]);
    end else begin
      for (int t = K; t < N; t++) begin sa_push(y[t-2]); sa_push(y[t-1]); end
      sa_push(y[N-2]); sa_push(y[N-1]);
    end
  endtask

  task automatic run(input int sch, input int tr, input bit ii, input bit io,
                     input logic [K-1:0][M-1:0] exp_in, output int cycles);
    @(negedge clk);
    scheme = scheme_e'(sch); traj = traj_e'(tr); inv_in = ii; inv_out = io;
    expected = exp_in; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cycles, exp_cycles;
    logic [K-1:0][M-1:0] mexp;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int sch = 0; sch < 2; sch++)
      for (int tr = 0; tr < 3; tr++)
        for (int inv = 0; inv < 4; inv++) begin
          seed = {4'($urandom), 4'($urandom)};
          build_model(sch, tr, inv[0], inv[1], seed[0], seed[1]);
          mexp = {4'(y[N-2]), 4'(y[N-1])};
          run(sch, tr, inv[0], inv[1], mexp, cycles);
          // clocks from the edge that takes start to the edge that raises done
          exp_cycles = (sch == 0) ? 4 * N + 2 : 1 + 2 * K + (N - K) * (K + 3) + (K + 1) + 1;
          checks += 4;
          if (!pass || final_state != mexp) begin
            failures++;
            $display("FAIL sch %0d tr %0d inv %0d: final %h ref %h", sch, tr, inv, final_state, mexp);
          end
          if (cycles != exp_cycles) begin
            failures++;
            $display("FAIL sch %0d cycles %0d expected %0d", sch, cycles, exp_cycles);
          end
          if (sig != 8'({sa_m[3:0], sa_l[3:0]})) begin
            failures++;
            $display("FAIL sch %0d tr %0d inv %0d: signature %h ref %h", sch, tr, inv, sig, {sa_m[3:0], sa_l[3:0]});
          end
          begin
            automatic int bad = 0;
            for (int t = 0; t < N; t++)
              if (u_ram.mem[A[t]] != 4'(x[t] ^ (inv[0] ? 'hF : 0))) bad++;
            if (bad != 0) begin failures++; $display("FAIL sch %0d tr %0d: %0d cells differ", sch, tr, bad); end
          end
        end
    // a wrong expected value is reported as a failure
    build_model(0, 0, 0, 0, 1, 0);
    seed = {4'h0, 4'h1};
    run(0, 0, 0, 0, {4'(y[N-2]), 4'(y[N-1] ^ 1)}, cycles);
    checks++;
    if (pass) begin failures++; $display("FAIL wrong expected accepted"); end
    // injected stuck-at faults must be detected in both schemes
    for (int sch = 0; sch < 2; sch++)
      for (int n = 0; n < 4; n++) begin
        automatic int tpos = K + int'($urandom % (N - 2 * K));
        seed = {4'($urandom), 4'($urandom) | 4'h1};
        build_model(sch, 2, 0, 0, seed[0], seed[1]);
        stuck_en = 1; stuck_addr = AW'(A[tpos]); stuck_bit = 3'($urandom % 4);
        stuck_val = ~x[tpos][stuck_bit];
        run(sch, 2, 0, 0, {4'(y[N-2]), 4'(y[N-1])}, cycles);
        stuck_en = 0;
        checks++;
        if (pass) begin failures++; $display("FAIL fault at %0d not detected (scheme %0d)", tpos, sch); end
      end
    // Init = Fin: 2042 cells = 2040 shifts = 8 periods of 255, compared with the seed
    for (int n = 0; n < 4; n++) begin
      automatic int lp = (n == 3) ? 2040 : 2041;
      automatic int sch = n % 2;
      last_pos = AW'(lp); nlen = lp + 1; cmp_init = 1;
      seed = {4'($urandom), 4'($urandom) | 4'h1};
      build_model(sch, 2, n == 2, n == 2, seed[0], seed[1]);
      run(sch, 2, n == 2, n == 2, ~seed, cycles);
      checks += 3;
      if (n < 3 && !pass) begin failures++; $display("FAIL Init=Fin run %0d", n); end
      if (n == 3 && pass) begin failures++; $display("FAIL Init=Fin accepted a non-multiple"); end
      if (final_state != {4'(y[nlen-2]), 4'(y[nlen-1])}) begin failures++; $display("FAIL short final"); end
      exp_cycles = (sch == 0) ? 4 * nlen + 2 : 1 + 2 * K + (nlen - K) * (K + 3) + (K + 1) + 1;
      if (cycles != exp_cycles) begin failures++; $display("FAIL short cycles %0d/%0d", cycles, exp_cycles); end
    end
    cmp_init = 0; last_pos = '1; nlen = N;
    // run-time polynomial: random coefficients, both schemes
    for (int n = 0; n < 6; n++) begin
      c0 = (n == 0) ? 2 : $urandom % 16; c1 = (n == 0) ? 2 : 1 + $urandom % 15;
      coef = {4'(c1), 4'(c0)};
      seed = {4'($urandom), 4'($urandom)};
      build_model(n % 2, n % 3, 0, n == 5, seed[0], seed[1]);
      @(negedge clk);
      scheme = scheme_e'(n % 2); traj = traj_e'(n % 3); inv_in = 0; inv_out = (n == 5);
      expected = {4'(y[N-2]), 4'(y[N-1])}; start2 = 1;
      @(negedge clk); start2 = 0;
      while (!done2) @(negedge clk);
      checks++;
      if (!pass2 || final2 != {4'(y[N-2]), 4'(y[N-1])}) begin
        failures++; $display("FAIL prog poly c0=%0d c1=%0d final %h", c0, c1, final2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
