// tb_addr_gen: GenA at its default width (2048 addresses). For each trajectory the
// address sequence is compared with an independent model, every address must appear
// exactly once, `last` must rise exactly at the 2048th address, and each step must
// take one clock.
module tb_addr_gen;
  import prt_pkg::*;
  import tb_gf_pkg::*;

  localparam int AW = 11;
  localparam int N  = 1 << AW;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, step = 0;
  traj_e mode;
  logic [AW-1:0] addr, pos;
  logic last;

  addr_gen #(.AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen [N];
    int unsigned ref_a;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = traj_e'(m);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      foreach (seen[i]) seen[i] = 0;
      ref_a = (m == 1) ? N - 1 : 0;
      for (int t = 0; t < N; t++) begin
        checks++;
        if (addr != AW'(ref_a) || seen[addr] || last != (t == N - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL mode %0d t %0d addr %0d ref %0d last %0d", m, t, addr, ref_a, last);
        end
        seen[addr] = 1;
        step = 1;
        @(negedge clk);                  // one clock per step
        step = 0;
        ref_a = (m == 0) ? (ref_a + 1) % N : (m == 1) ? (ref_a + N - 1) % N
                                           : lfsr_next(ref_a, AW, taps_of(AW));
      end
      checks++;
      foreach (seen[i]) if (!seen[i]) begin failures++; break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
