// tp_ram: two-port (A and B) RAM whose address registers double as counters.
//
// The pi-test of a two-port memory needs only that the existing address registers
// RgAddrA and RgAddrB can count; this module is that modified memory. Each port
// has an address register that loads `x_addr` on `x_ld` or counts by one on `x_cnt`
// (up when `x_up`, else down), and the array is accessed at the register's current
// value: with `x_en` a write (`x_we`) takes `x_din` at the clock edge, a read puts
// the cell on `x_dout` one clock later. Loading and counting take effect at the same
// edge as the access, so the access uses the address held before the edge. Writes
// to the same cell from both ports in one clock: port B wins (this design's choice;
// the paper says nothing about collisions). N = 2**AW cells of M bits, no reset of
// the array.
module tp_ram #(
  parameter int unsigned AW = 11,
  parameter int unsigned M  = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  // port A
  input  logic          a_ld,
  input  logic [AW-1:0] a_addr,
  input  logic          a_cnt,
  input  logic          a_up,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [M-1:0]  a_din,
  output logic [M-1:0]  a_dout,
  output logic [AW-1:0] a_reg,
  // port B
  input  logic          b_ld,
  input  logic [AW-1:0] b_addr,
  input  logic          b_cnt,
  input  logic          b_up,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [M-1:0]  b_din,
  output logic [M-1:0]  b_dout,
  output logic [AW-1:0] b_reg
);

  logic [M-1:0] mem [2**AW];

  // RgAddrA / RgAddrB: load or count.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_reg <= '0;
      b_reg <= '0;
    end else begin
      if (a_ld)       a_reg <= a_addr;
      else if (a_cnt) a_reg <= a_up ? a_reg + 1'b1 : a_reg - 1'b1;
      if (b_ld)       b_reg <= b_addr;
      else if (b_cnt) b_reg <= b_up ? b_reg + 1'b1 : b_reg - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (a_en && a_we) mem[a_reg] <= a_din;
    if (b_en && b_we) mem[b_reg] <= b_din;
    if (a_en && !a_we) a_dout <= mem[a_reg];
    if (b_en && !b_we) b_dout <= mem[b_reg];
  end

endmodule
