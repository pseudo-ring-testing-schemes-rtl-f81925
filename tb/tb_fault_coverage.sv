// tb_fault_coverage: the bit-oriented ring-scheme experiment. A 32 x 1 RAM is
// tested by three pi-iterations (k + 1 iterations for a degree-2 LFSR,
// p(x) = 1 + x + x^2 over GF(2), i.e. M = 1, K = 2, COEF = 2'b11, period 3):
//   1. up, seed (0, 1)     2. down, seed (0, 1)     3. up, seed (1, 1)
// The seeds are chosen so that, with the period-3 sequence, every cell is written
// with 0 in one iteration and with 1 in another.
// First the fault-free memory must give the final states of an independent model.
// Then every single-cell fault (SA0, SA1, TFu, TFd, WDF, RDF, DRDF) at every cell
// and every two-cell coupling fault (CFin, CFid) for 64 random cell pairs is
// injected; a fault counts as detected when any iteration's final state or
// signature differs from the fault-free run. This is done for the ring and for the
// scan scheme. Stuck-at faults must all be caught in both; the coverage of each
// class is printed.
module tb_fault_coverage;
  import prt_pkg::*;
  import tb_gf_pkg::*;

  localparam int AW = 5, N = 1 << AW, K = 2;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  scheme_e scheme = SCHEME_RING;
  traj_e traj = TRAJ_UP;
  logic inv_in = 0, inv_out = 0;
  logic [K-1:0][0:0] seed = '0, expected = '0, final_state;
  logic busy, done, pass;
  logic ag_start, ag_step, ag_last;
  logic [AW-1:0] ag_addr, ag_pos, ram_a;
  logic ram_en, ram_rw;
  logic [0:0] ram_d, ram_q, rd_data;
  logic rd_valid;
  logic [1:0] sig;
  int kind = 0;
  logic [AW-1:0] victim = '0, aggressor = '0;

  logic cmp_init = 0;
  logic [AW-1:0] last_pos = '1;
  logic [K-1:0][0:0] coef = '0;
  prt_controller #(.AW(AW), .M(1), .K(K), .P(1'b1), .COEF(2'b11)) dut (.*);
  addr_gen #(.AW(AW)) u_gena (.clk, .rst_n, .start(ag_start), .step(ag_step), .mode(traj),
                              .addr(ag_addr), .pos(ag_pos), .last(ag_last));
  fault_bit_ram #(.AW(AW)) u_ram (.clk, .en(ram_en), .rw(ram_rw), .a(ram_a), .d(ram_d),
                                  .q(ram_q), .kind, .victim, .aggressor);
  signature_analyzer #(.M(1), .P(1'b1), .CL(1'b1), .CM(1'b1)) u_sa (.clk, .rst_n,
    .clear(ag_start), .seed(2'b00), .en(rd_valid), .din(rd_data), .sig(sig));

  always #5 clk = ~clk;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int ITER = 3;
  traj_e it_traj [ITER] = '{TRAJ_UP, TRAJ_DOWN, TRAJ_UP};
  logic [1:0] it_seed [ITER] = '{2'b01, 2'b01, 2'b11};   // {seed[1], seed[0]}
  logic it_inv [ITER] = '{1'b0, 1'b0, 1'b0};
  logic [1:0] gold_fin [ITER], gold_sig [ITER];

  // runs the three iterations; returns 1 if any differs from the golden run
  task automatic run_test(input bit record, output bit detected);
    detected = 0;
    for (int i = 0; i < ITER; i++) begin
      @(negedge clk);
      traj = it_traj[i]; seed = it_seed[i]; inv_in = it_inv[i]; inv_out = it_inv[i];
      expected = gold_fin[i]; start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      if (record) begin gold_fin[i] = final_state; gold_sig[i] = sig; end
      else if (final_state != gold_fin[i] || sig != gold_sig[i]) detected = 1;
    end
  endtask

  initial begin
    bit det;
    string names [14] = '{"", "SA0", "SA1", "TFu", "TFd", "WDF", "RDF", "DRDF",
                          "CFin-up", "CFin-down", "CFid-up0", "CFid-up1", "CFid-down0", "CFid-down1"};
    int n_det [14], n_tot [14];
    int s_det, s_tot, c_det, c_tot;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int sch = 0; sch < 2; sch++) begin
      scheme = scheme_e'(sch);
      foreach (n_det[k]) begin n_det[k] = 0; n_tot[k] = 0; end
      s_det = 0; s_tot = 0; c_det = 0; c_tot = 0;
      // golden run, checked against an independent model of the LFSR over GF(2)
      kind = 0;
      run_test(1, det);
      for (int i = 0; i < ITER; i++) begin
        automatic int unsigned x [N];
        x[0] = it_seed[i][1]; x[1] = it_seed[i][0];
        for (int t = 2; t < N; t++) x[t] = x[t-1] ^ x[t-2];
        checks++;
        if (gold_fin[i] != {1'(x[N-2]), 1'(x[N-1])}) begin
          failures++; $display("FAIL fault-free iteration %0d: %b", i, gold_fin[i]);
        end
      end
      // single-cell faults at every cell
      for (int k = 1; k <= 7; k++)
        for (int v = 0; v < N; v++) begin
          kind = k; victim = AW'(v); aggressor = AW'(v);
          run_test(0, det);
          n_tot[k]++; if (det) n_det[k]++;
        end
      // coupling faults, random distinct pairs
      for (int k = 8; k <= 13; k++)
        for (int n = 0; n < 64; n++) begin
          automatic int v = $urandom % N;
          automatic int g = (v + 1 + $urandom % (N - 1)) % N;
          kind = k; victim = AW'(v); aggressor = AW'(g);
          run_test(0, det);
          n_tot[k]++; if (det) n_det[k]++;
        end
      kind = 0;
      $display("%s scheme", sch ? "scan" : "ring");
      for (int k = 1; k <= 13; k++) begin
        $display("  coverage %-11s %0d/%0d", names[k], n_det[k], n_tot[k]);
        if (k <= 7) begin s_det += n_det[k]; s_tot += n_tot[k]; end
        else        begin c_det += n_det[k]; c_tot += n_tot[k]; end
      end
      $display("  single-cell faults: %0d/%0d detected, two-cell faults: %0d/%0d detected",
               s_det, s_tot, c_det, c_tot);
      checks++;
      if (n_det[1] != N || n_det[2] != N) begin failures++; $display("FAIL stuck-at escaped"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
