// tb_signature_analyzer: random word streams into the signature register; the
// reference uses the printed sum table (fig4_table.hex): LSW' = T[16*MSW + LSW] ^ d,
// MSW' = LSW, one word per clock. Also checks clear/seed and that en = 0 holds.
module tb_signature_analyzer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [7:0] seed = '0, sig;
  logic [3:0] din = '0;
  logic [3:0] table_q [256];
  logic [3:0] lsw, msw;

  signature_analyzer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $readmemh("tb/fig4_table.hex", table_q);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      @(negedge clk);
      clear = 1; seed = 8'($urandom); msw = seed[7:4]; lsw = seed[3:0];
      @(negedge clk);
      clear = 0;
      for (int i = 0; i < 200; i++) begin
        en = ($urandom % 4) != 0; din = 4'($urandom);
        @(negedge clk);
        if (en) begin
          logic [3:0] nl;
          nl  = table_q[{msw, lsw}] ^ din;
          msw = lsw; lsw = nl;
        end
        checks++;
        if (sig != {msw, lsw}) begin
          failures++;
          if (failures < 10) $display("FAIL run %0d word %0d sig %h ref %h", run, i, sig, {msw, lsw});
        end
      end
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
