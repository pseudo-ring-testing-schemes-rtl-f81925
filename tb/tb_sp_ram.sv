// tb_sp_ram: writes every cell of the default 2048 x 4 RAM with random data, reads
// it back and checks the one-clock read latency and that idle cycles hold `q`.
module tb_sp_ram;
  localparam int AW = 11, M = 4, N = 1 << AW;

  int checks = 0, failures = 0;
  logic clk = 0, en = 0, rw = 0;
  logic [AW-1:0] a = '0;
  logic [M-1:0] d = '0, q;
  logic [M-1:0] model [N];

  sp_ram #(.AW(AW), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      en = 1; rw = 1; a = AW'(i); d = M'($urandom); model[i] = d;
    end
    for (int i = N - 1; i >= 0; i--) begin
      @(negedge clk);
      en = 1; rw = 0; a = AW'(i);
      @(negedge clk);                  // data one clock later
      en = 0; a = AW'($urandom);
      checks++;
      if (q != model[i]) begin failures++; $display("FAIL addr %0d", i); end
      @(negedge clk);                  // idle: q held
      checks++;
      if (q != model[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
