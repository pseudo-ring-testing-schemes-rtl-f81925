// tb_tp_prt: pi-iterations of the two-port RAM (defaults: 2048 x 4, q(z) = 1 + 2z +
// 2z^2) counting up and down with all inversion settings. An independent model
// gives the final state and the memory contents; the iteration must take exactly
// 2*(N-2) + 4 clocks (two clocks per shift). The seed (0, 1) over 2048 cells must
// end in the state the sequence 0, 1, 2, 6, 8, F, E, ... has at position 2046/2047.
// A wrong expected value must be reported.
module tb_tp_prt;
  import tb_gf_pkg::*;

  localparam int AW = 11, M = 4, N = 1 << AW;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, down = 0, inv_in = 0, inv_out = 0;
  logic [1:0][M-1:0] seed, expected, final_state;
  logic busy, done, pass, up;
  logic a_ld, a_cnt, a_en, a_we, b_ld, b_cnt, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr, a_reg, b_reg;
  logic [M-1:0] a_din, b_din, a_dout, b_dout;

  tp_prt #(.AW(AW), .M(M)) dut (.*);
  tp_ram #(.AW(AW), .M(M)) u_ram (.clk, .rst_n, .a_ld, .a_addr, .a_cnt, .a_up(up), .a_en,
    .a_we, .a_din, .a_dout, .a_reg, .b_ld, .b_addr, .b_cnt, .b_up(up), .b_en, .b_we, .b_din,
    .b_dout, .b_reg);

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned x [N], y [N];

  initial begin
    int cycles;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 9; run++) begin
      automatic bit dn = run[0];
      automatic bit ii = run[1];
      automatic bit io = run[2];
      int unsigned flip;
      if (run == 8) begin dn = 0; ii = 0; io = 0; end
      flip = (ii ^ io) ? 'hF : 0;
      seed = (run == 0) ? {4'h0, 4'h1} : {4'($urandom), 4'($urandom)};
      x[0] = seed[1]; x[1] = seed[0];
      for (int t = 0; t < N; t++) begin
        if (t >= 2) x[t] = gf_mul(2, y[t-1], 4, 'h13) ^ gf_mul(2, y[t-2], 4, 'h13);
        y[t] = x[t] ^ flip;
      end
      if (run == 0) begin
        checks++;
        if (x[2] != 2 || x[3] != 6 || x[4] != 8 || x[5] != 15 || x[6] != 14) failures++;
      end
      @(negedge clk);
      down = dn; inv_in = ii; inv_out = io; start = 1;
      expected = {4'(y[N-2]), 4'(y[N-1])};
      if (run == 8) expected[0] = expected[0] ^ 4'h8;
      @(negedge clk); start = 0; cycles = 0;
      while (!done) begin @(negedge clk); cycles++; end
      checks += 3;
      if (run < 8 && (!pass || final_state != {4'(y[N-2]), 4'(y[N-1])})) begin
        failures++;
        $display("FAIL run %0d final %h ref %h", run, final_state, {4'(y[N-2]), 4'(y[N-1])});
      end
      if (run == 8 && pass) begin failures++; $display("FAIL wrong expected accepted"); end
      if (cycles != 2 * (N - 2) + 4) begin failures++; $display("FAIL cycles %0d", cycles); end
      begin
        automatic int bad = 0;
        for (int t = 0; t < N; t++) begin
          automatic int unsigned ad = dn ? N - 1 - t : t;
          if (u_ram.mem[ad] != 4'(x[t] ^ (ii ? 'hF : 0))) begin
            bad++;
            if (bad < 4) $display("  cell %0d mem %h model %h", ad, u_ram.mem[ad], x[t]);
          end
        end
        if (bad != 0) begin failures++; $display("FAIL run %0d %0d cells differ", run, bad); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
