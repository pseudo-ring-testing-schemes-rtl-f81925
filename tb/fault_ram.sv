// fault_ram: simulation model of the single-port RAM with one injectable
// stuck-at fault. Same port and timing as sp_ram (write on rw = 1, registered
// read one clock later); while `stuck_en` is high, bit `stuck_bit` of cell
// `stuck_addr` always holds `stuck_val`, whatever is written.
module fault_ram #(
  parameter int unsigned AW = 11,
  parameter int unsigned M  = 4
) (
  input  logic          clk,
  input  logic          en,
  input  logic          rw,
  input  logic [AW-1:0] a,
  input  logic [M-1:0]  d,
  output logic [M-1:0]  q,
  input  logic          stuck_en,
  input  logic [AW-1:0] stuck_addr,
  input  logic [$clog2(M+1)-1:0] stuck_bit,
  input  logic          stuck_val
);
  logic [M-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (en) begin
      if (rw) begin
        mem[a] <= d;
        if (stuck_en && a == stuck_addr) mem[a][stuck_bit] <= stuck_val;
      end else begin
        q <= mem[a];
      end
    end
  end
endmodule
