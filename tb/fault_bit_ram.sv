// fault_bit_ram: simulation model of a bit-oriented single-port RAM (same port and
// timing as sp_ram with M = 1) holding one injectable fault from the usual
// functional fault models:
//   1 SA0, 2 SA1       stuck-at 0 / 1 of cell `victim`
//   3 TFu, 4 TFd       victim cannot make the 0->1 / 1->0 transition
//   5 WDF              a non-transition write flips the victim
//   6 RDF              a read flips the victim and returns the flipped value
//   7 DRDF             a read flips the victim but returns the old value
//   8 CFin up, 9 down  an up / down transition of `aggressor` inverts the victim
//  10..13 CFid         up transition of aggressor forces 0 / 1, down forces 0 / 1
// `kind` = 0 is the fault-free memory.
module fault_bit_ram #(
  parameter int unsigned AW = 5
) (
  input  logic          clk,
  input  logic          en,
  input  logic          rw,
  input  logic [AW-1:0] a,
  input  logic [0:0]    d,
  output logic [0:0]    q,
  input  int            kind,
  input  logic [AW-1:0] victim,
  input  logic [AW-1:0] aggressor
);
  logic mem [2**AW];

  always @(posedge clk) begin
    if (en && rw) begin
      automatic logic old = mem[a];
      automatic logic nv  = d[0];
      if (a == victim) begin
        case (kind)
          1: nv = 1'b0;
          2: nv = 1'b1;
          3: if (!old && d[0]) nv = 1'b0;
          4: if (old && !d[0]) nv = 1'b1;
          5: if (old == d[0]) nv = ~old;
          default: ;
        endcase
      end
      mem[a] <= nv;
      if (a == aggressor && a != victim && old != nv) begin
        case (kind)
          8:  if (nv)  mem[victim] <= ~mem[victim];
          9:  if (!nv) mem[victim] <= ~mem[victim];
          10: if (nv)  mem[victim] <= 1'b0;
          11: if (nv)  mem[victim] <= 1'b1;
          12: if (!nv) mem[victim] <= 1'b0;
          13: if (!nv) mem[victim] <= 1'b1;
          default: ;
        endcase
      end
    end else if (en) begin
      q <= mem[a];
      if (a == victim && kind == 6) begin mem[a] <= ~mem[a]; q <= ~mem[a]; end
      if (a == victim && kind == 7) mem[a] <= ~mem[a];
    end
  end
endmodule
