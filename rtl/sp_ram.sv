// sp_ram: the single-port RAM under test (the "RAM" box with D, R/W and A ports).
//
// N = 2**AW cells of M bits, one port, synchronous write and registered read: with
// `rw` = 1 (write) the cell at `a` takes `d` at the clock edge; with `rw` = 0 (read)
// and `en` = 1, `q` shows the cell one clock later. `en` = 0 is an idle cycle that
// keeps `q`. No reset of the array: a test writes every cell before reading it.
// The read latency and the write-over-read encoding of `rw` are this design's choices.
module sp_ram #(
  parameter int unsigned AW = 11,
  parameter int unsigned M  = 4
) (
  input  logic          clk,
  input  logic          en,
  input  logic          rw,     // 1 = write, 0 = read
  input  logic [AW-1:0] a,
  input  logic [M-1:0]  d,
  output logic [M-1:0]  q
);

  logic [M-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (en) begin
      if (rw) mem[a] <= d;
      else    q      <= mem[a];
    end
  end

endmodule
