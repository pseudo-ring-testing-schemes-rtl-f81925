// tb_tp_ram: the two-port RAM with counting address registers. Fills the memory
// through port A counting up, reads it back through port B counting down and
// through port A after loads, checks both counters' wrap-around, the one-clock read
// latency, simultaneous reads of two ports and port B winning a write collision.
module tb_tp_ram;
  localparam int AW = 6, M = 4, N = 1 << AW;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic a_ld = 0, a_cnt = 0, a_up = 1, a_en = 0, a_we = 0;
  logic b_ld = 0, b_cnt = 0, b_up = 1, b_en = 0, b_we = 0;
  logic [AW-1:0] a_addr = '0, b_addr = '0, a_reg, b_reg;
  logic [M-1:0] a_din = '0, b_din = '0, a_dout, b_dout;
  logic [M-1:0] model [N];

  tp_ram #(.AW(AW), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    a_ld = 0; a_cnt = 0; a_en = 0; a_we = 0; b_ld = 0; b_cnt = 0; b_en = 0; b_we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load A = 0, write all cells while counting up
    @(negedge clk); idle(); a_ld = 1; a_addr = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); idle();
      a_en = 1; a_we = 1; a_din = M'($urandom); model[i] = a_din; a_cnt = 1; a_up = 1;
    end
    @(negedge clk); idle();
    checks++; if (a_reg != '0) begin failures++; $display("FAIL A counter wrap %0d", a_reg); end
    // B loads N-1 and reads counting down
    b_ld = 1; b_addr = '1;
    for (int i = N - 1; i >= 0; i--) begin
      @(negedge clk); idle(); b_en = 1; b_cnt = 1; b_up = 0;
      @(negedge clk); idle();
      checks++;
      if (b_dout != model[i]) begin failures++; $display("FAIL B read %0d", i); end
    end
    checks++; if (b_reg != '1) begin failures++; $display("FAIL B counter wrap %0d", b_reg); end
    // both ports read different cells in one clock
    for (int n = 0; n < 50; n++) begin
      automatic int i = $urandom % N;
      automatic int j = $urandom % N;
      @(negedge clk); idle(); a_ld = 1; a_addr = AW'(i); b_ld = 1; b_addr = AW'(j);
      @(negedge clk); idle(); a_en = 1; b_en = 1;
      @(negedge clk); idle();
      checks += 2;
      if (a_dout != model[i] || b_dout != model[j]) begin failures++; $display("FAIL dual read"); end
    end
    // collision: both write cell 5, B wins
    @(negedge clk); idle(); a_ld = 1; a_addr = AW'(5); b_ld = 1; b_addr = AW'(5);
    @(negedge clk); idle(); a_en = 1; a_we = 1; a_din = 4'h3; b_en = 1; b_we = 1; b_din = 4'hC;
    @(negedge clk); idle(); a_en = 1;
    @(negedge clk); idle();
    checks++; if (a_dout != 4'hC) begin failures++; $display("FAIL collision"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
