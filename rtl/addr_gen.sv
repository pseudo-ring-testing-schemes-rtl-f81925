// addr_gen: GenA, the address sequencer that sets the trajectory of the virtual LFSR.
//
// It walks all N = 2**AW addresses once per pi-iteration in one of three orders
// (the paper's three trajectories): counting up (0 .. N-1), counting down
// (N-1 .. 0) or pseudorandom. The pseudorandom order comes from a maximal-length
// Fibonacci LFSR of width AW whose feedback is complemented when the low AW-1 bits
// are zero, which inserts the all-zero state, so every address is visited exactly
// once, starting and ending at 0 (the LFSR choice is this design's own; the paper
// only names the trajectory).
//
// Timing: `start` loads the first address of the selected order (and latches the
// mode); each `step` moves to the next address one clock later. `last` is high while
// the N-th address of the walk is presented. `pos` is the trajectory position.
module addr_gen
  import prt_pkg::*;
#(
  parameter int unsigned AW = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          step,
  input  traj_e         mode,
  output logic [AW-1:0] addr,
  output logic [AW-1:0] pos,
  output logic          last
);

  localparam logic [AW-1:0] TAPS = AW'(lfsr_taps(AW));

  traj_e         mode_q;
  logic [AW-1:0] addr_nxt;
  logic          fb;

  always_comb begin
    fb = ^(addr & TAPS);
    if (addr[AW-1:0] << 1 == '0) fb = ~fb;   // low AW-1 bits all zero: insert state 0
    unique case (mode_q)
      TRAJ_DOWN:   addr_nxt = addr - 1'b1;
      TRAJ_PSEUDO: addr_nxt = (AW >= 2) ? {addr[AW-2:0], fb} : addr + 1'b1;
      default:     addr_nxt = addr + 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= TRAJ_UP;
      addr   <= '0;
      pos    <= '0;
    end else if (start) begin
      mode_q <= mode;
      addr   <= (mode == TRAJ_DOWN) ? '1 : '0;
      pos    <= '0;
    end else if (step) begin
      addr <= addr_nxt;
      pos  <= pos + 1'b1;
    end
  end

  assign last = (pos == '1);

endmodule
