// regfile_prt: register file with the scan pi-testing scheme.
//
// A register file of 2**RAW words of M bits with one write port (WrAddr, WrEn, DIn)
// and one read port (RdAddr, RdEn, DOut), read through a multiplexer (no latency).
// For testing, two chains are added:
//  * address chain: on `addr_shift`, RgWrAddr takes `addr_in` and RgRdAddr takes the
//    old RgWrAddr; RgRdAddr continues the chain on `addr_out`. So the read address
//    is always the address written one address step earlier.
//  * data chain: DOut -> RgScan (two stages) -> XOR block -> DIn. On a clock with
//    RdEn the word at RgRdAddr enters stage 0 and stage 0 moves to stage 1; on a
//    clock with WrEn the XOR block result of the two stages is written at RgWrAddr.
// The two chains are clocked by separate enables, so an external test sequence
// (prepared off-chip) schedules reads, writes and address steps freely; a plain
// pushing step is: addr_shift, then RdEn, then WrEn. `scan_load` loads RgScan with
// `scan_seed` and `scan_state` shows it (the final state of a pi-iteration), which
// stands for the scan access to RgScan. With `test_mode` = 0 the file works as an
// ordinary register file on `wr_addr`, `rd_addr` and `din`.
// The XOR block is either one GLFSR over GF(2^M) (XOR_TYPE = 1, default, for faults
// between words) or a group of independent LFSR lanes over GF(2^LM) (XOR_TYPE = 2,
// for faults inside a word; by default one-bit lanes, one XOR gate per bit).
// The chains and both XOR block kinds follow the method; the register file size,
// the parallel seed load and the enable-per-chain clocking are this design's choices.
module regfile_prt
  import prt_pkg::*;
#(
  parameter int unsigned RAW = 5,
  parameter int unsigned M   = 4,
  parameter logic [M-1:0]   P    = M'(P_POLY_DEF),
  parameter logic [2*M-1:0] COEF = (2*M)'(COEF_DEF),
  // XOR block kind: 1 = one GLFSR over GF(2^M) (COEF); 2 = M/LM lanes, each an LFSR
  // over GF(2^LM) with field polynomial LP and coefficients LCOEF
  parameter int unsigned    XOR_TYPE = 1,
  parameter int unsigned    LM       = 1,
  parameter logic [LM-1:0]  LP       = LM'(1'b1),
  parameter logic [2*M-1:0] LCOEF    = '1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                test_mode,
  // ordinary ports
  input  logic [RAW-1:0]      wr_addr,
  input  logic [M-1:0]        din,
  input  logic [RAW-1:0]      rd_addr,
  input  logic                wr_en,
  input  logic                rd_en,
  output logic [M-1:0]        dout,
  // address chain
  input  logic                addr_shift,
  input  logic [RAW-1:0]      addr_in,
  output logic [RAW-1:0]      addr_out,
  // data chain (RgScan)
  input  logic                scan_load,
  input  logic [1:0][M-1:0]   scan_seed,
  output logic [1:0][M-1:0]   scan_state
);

  logic [M-1:0]      rf [2**RAW];
  logic [RAW-1:0]    rg_wr_addr, rg_rd_addr;
  logic [1:0][M-1:0] rg_scan;
  logic [RAW-1:0]    wa, ra;
  logic [M-1:0]      wd, fb;

  if (XOR_TYPE == 2) begin : g_lanes
    glfsr_feedback_lanes #(.K(2), .M(M), .LM(LM), .LP(LP), .LCOEF(LCOEF)) u_xor (
      .stage(rg_scan),
      .y    (fb)
    );
  end else begin : g_glfsr
    glfsr_feedback #(.K(2), .M(M), .P(P), .COEF(COEF)) u_xor (
      .stage(rg_scan),
      .y    (fb)
    );
  end

  assign wa   = test_mode ? rg_wr_addr : wr_addr;
  assign ra   = test_mode ? rg_rd_addr : rd_addr;
  assign wd   = test_mode ? fb : din;
  assign dout = rf[ra];

  always_ff @(posedge clk) begin
    if (wr_en) rf[wa] <= wd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rg_wr_addr <= '0;
      rg_rd_addr <= '0;
      rg_scan    <= '0;
    end else begin
      if (test_mode && addr_shift) begin
        rg_wr_addr <= addr_in;
        rg_rd_addr <= rg_wr_addr;
      end
      if (scan_load) begin
        rg_scan <= scan_seed;
      end else if (test_mode && rd_en) begin
        rg_scan[1] <= rg_scan[0];
        rg_scan[0] <= dout;
      end
    end
  end

  assign addr_out   = rg_rd_addr;
  assign scan_state = rg_scan;

endmodule
