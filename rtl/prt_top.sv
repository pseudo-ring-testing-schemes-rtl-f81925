// prt_top: pseudo-ring (pi) self-test of three memories in one block.
//
//  1. A single-port RAM (sp_ram) with the pi-test controller (prt_controller), its
//     address sequencer GenA (addr_gen), the XOR block and ShReg inside the
//     controller, and a signature analyzer on the read data. Ring or scan scheme,
//     up/down/pseudorandom trajectory, input/output inversion, seed, iteration
//     length (`last_pos`), comparison with `expected` or with the seed (`cmp_init`)
//     and, with PROG_POLY = 1, the polynomial (`coef`) are chosen per
//     iteration. While the controller is busy a multiplexer hands the RAM port to
//     it; otherwise the RAM is reached through the ordinary `mem_*` port.
//  2. A two-port RAM (tp_ram) whose address registers count, tested by tp_prt; the
//     same multiplexing gives the ordinary `tpa_*` / `tpb_*` ports when idle.
//  3. A register file with address and data scan chains (regfile_prt). Its test
//     sequence is prepared off-chip and comes in on the `rf_*` chain ports. Its
//     XOR block is the GLFSR (default) or, with RF_XOR_TYPE = 2, a group of LFSR
//     lanes.
// All three share the XOR-block polynomial q(z) (COEF) over GF(2^M) mod p(x) (P);
// the signature analyzer uses its own q(z) = 1 + z + 9z^2. The signature is cleared
// when a single-port iteration starts and is read on `signature` after `done`.
module prt_top
  import prt_pkg::*;
#(
  parameter int unsigned AW     = 11,      // single-port RAM: 2**AW cells (1 kB of 4-bit cells)
  parameter int unsigned TP_AW  = 11,      // two-port RAM: 2**TP_AW cells
  parameter int unsigned RF_AW  = 5,       // register file: 2**RF_AW words
  parameter int unsigned M      = M_DEF,   // cell size, bits
  parameter int unsigned K      = K_DEF,   // stages of the virtual GLFSR
  parameter logic [M-1:0]   P       = M'(P_POLY_DEF),
  parameter logic [K*M-1:0] COEF    = (K*M)'(COEF_DEF),
  parameter logic [2*M-1:0] SA_COEF = (2*M)'(SA_COEF_DEF),
  parameter bit             PROG_POLY = 1'b0,  // 1: q(z) of the single-port test set per iteration
  // register file XOR block: 1 = GLFSR over GF(2^M) with COEF, 2 = LFSR lanes of
  // RF_LM bits (field polynomial RF_LP, coefficients RF_LCOEF)
  parameter int unsigned    RF_XOR_TYPE = 1,
  parameter int unsigned    RF_LM       = 1,
  parameter logic [RF_LM-1:0] RF_LP     = RF_LM'(1'b1),
  parameter logic [2*M-1:0] RF_LCOEF    = '1
) (
  input  logic                clk,
  input  logic                rst_n,
  // ---- single-port RAM pi-test
  input  logic                start,
  input  scheme_e             scheme,
  input  traj_e               traj,
  input  logic                inv_in,
  input  logic                inv_out,
  input  logic [K-1:0][M-1:0] seed,
  input  logic [K-1:0][M-1:0] expected,
  input  logic                cmp_init,
  input  logic [AW-1:0]       last_pos,
  input  logic [K-1:0][M-1:0] coef,
  output logic                busy,
  output logic                done,
  output logic                pass,
  output logic [K-1:0][M-1:0] final_state,
  output logic [2*M-1:0]      signature,
  input  logic                mem_en,
  input  logic                mem_rw,
  input  logic [AW-1:0]       mem_a,
  input  logic [M-1:0]        mem_d,
  output logic [M-1:0]        mem_q,
  // ---- two-port RAM pi-test
  input  logic                tp_start,
  input  logic                tp_down,
  input  logic                tp_inv_in,
  input  logic                tp_inv_out,
  input  logic [1:0][M-1:0]   tp_seed,
  input  logic [1:0][M-1:0]   tp_expected,
  output logic                tp_busy,
  output logic                tp_done,
  output logic                tp_pass,
  output logic [1:0][M-1:0]   tp_final_state,
  input  logic                tpa_ld,
  input  logic [TP_AW-1:0]    tpa_addr,
  input  logic                tpa_cnt,
  input  logic                tpa_en,
  input  logic                tpa_we,
  input  logic [M-1:0]        tpa_din,
  output logic [M-1:0]        tpa_dout,
  input  logic                tpb_ld,
  input  logic [TP_AW-1:0]    tpb_addr,
  input  logic                tpb_cnt,
  input  logic                tpb_en,
  input  logic                tpb_we,
  input  logic [M-1:0]        tpb_din,
  output logic [M-1:0]        tpb_dout,
  // ---- register file with scan pi-testing
  input  logic                rf_test_mode,
  input  logic [RF_AW-1:0]    rf_wr_addr,
  input  logic [M-1:0]        rf_din,
  input  logic [RF_AW-1:0]    rf_rd_addr,
  input  logic                rf_wr_en,
  input  logic                rf_rd_en,
  output logic [M-1:0]        rf_dout,
  input  logic                rf_addr_shift,
  input  logic [RF_AW-1:0]    rf_addr_in,
  output logic [RF_AW-1:0]    rf_addr_out,
  input  logic                rf_scan_load,
  input  logic [1:0][M-1:0]   rf_scan_seed,
  output logic [1:0][M-1:0]   rf_scan_state
);

  // ------------------------------------------------------------------ single-port
  logic          ag_start, ag_step, ag_last;
  logic [AW-1:0] ag_addr, ag_pos;
  logic          c_en, c_rw;
  logic [AW-1:0] c_a;
  logic [M-1:0]  c_d, ram_q;
  logic          r_en, r_rw;
  logic [AW-1:0] r_a;
  logic [M-1:0]  r_d;
  logic          rd_valid;
  logic [M-1:0]  rd_data;

  addr_gen #(.AW(AW)) u_gena (
    .clk, .rst_n,
    .start(ag_start), .step(ag_step), .mode(traj),
    .addr(ag_addr), .pos(ag_pos), .last(ag_last)
  );

  prt_controller #(.AW(AW), .M(M), .K(K), .P(P), .COEF(COEF), .PROG_POLY(PROG_POLY)) u_ctrl (
    .clk, .rst_n,
    .start, .scheme, .inv_in, .inv_out, .seed, .expected, .cmp_init, .last_pos, .coef,
    .busy, .done, .pass, .final_state,
    .ag_start, .ag_step, .ag_addr,
    .ram_en(c_en), .ram_rw(c_rw), .ram_a(c_a), .ram_d(c_d), .ram_q(ram_q),
    .rd_valid, .rd_data
  );

  // Test multiplexer in front of the RAM.
  always_comb begin
    if (busy) begin
      r_en = c_en;   r_rw = c_rw;   r_a = c_a;   r_d = c_d;
    end else begin
      r_en = mem_en; r_rw = mem_rw; r_a = mem_a; r_d = mem_d;
    end
  end

  sp_ram #(.AW(AW), .M(M)) u_ram (
    .clk, .en(r_en), .rw(r_rw), .a(r_a), .d(r_d), .q(ram_q)
  );
  assign mem_q = ram_q;

  signature_analyzer #(.M(M), .P(P), .CL(SA_COEF[M-1:0]), .CM(SA_COEF[2*M-1:M])) u_sa (
    .clk, .rst_n,
    .clear(ag_start), .seed('0),
    .en(rd_valid), .din(rd_data),
    .sig(signature)
  );

  // ------------------------------------------------------------------- two-port
  logic             t_a_ld, t_a_cnt, t_a_en, t_a_we, t_b_ld, t_b_cnt, t_b_en, t_b_we, t_up;
  logic [TP_AW-1:0] t_a_addr, t_b_addr;
  logic [M-1:0]     t_a_din, t_b_din;
  logic             m_a_ld, m_a_cnt, m_a_en, m_a_we, m_b_ld, m_b_cnt, m_b_en, m_b_we, m_up;
  logic [TP_AW-1:0] m_a_addr, m_b_addr, a_reg, b_reg;
  logic [M-1:0]     m_a_din, m_b_din;

  tp_prt #(.AW(TP_AW), .M(M), .P(P), .COEF(COEF[2*M-1:0])) u_tp_prt (
    .clk, .rst_n,
    .start(tp_start), .down(tp_down), .inv_in(tp_inv_in), .inv_out(tp_inv_out),
    .seed(tp_seed), .expected(tp_expected),
    .busy(tp_busy), .done(tp_done), .pass(tp_pass), .final_state(tp_final_state),
    .a_ld(t_a_ld), .a_addr(t_a_addr), .a_cnt(t_a_cnt), .a_en(t_a_en), .a_we(t_a_we),
    .a_din(t_a_din), .a_dout(tpa_dout),
    .b_ld(t_b_ld), .b_addr(t_b_addr), .b_cnt(t_b_cnt), .b_en(t_b_en), .b_we(t_b_we),
    .b_din(t_b_din), .b_dout(tpb_dout),
    .up(t_up)
  );

  always_comb begin
    if (tp_busy) begin
      m_a_ld = t_a_ld; m_a_addr = t_a_addr; m_a_cnt = t_a_cnt; m_a_en = t_a_en;
      m_a_we = t_a_we; m_a_din = t_a_din;
      m_b_ld = t_b_ld; m_b_addr = t_b_addr; m_b_cnt = t_b_cnt; m_b_en = t_b_en;
      m_b_we = t_b_we; m_b_din = t_b_din;
      m_up   = t_up;
    end else begin
      m_a_ld = tpa_ld; m_a_addr = tpa_addr; m_a_cnt = tpa_cnt; m_a_en = tpa_en;
      m_a_we = tpa_we; m_a_din = tpa_din;
      m_b_ld = tpb_ld; m_b_addr = tpb_addr; m_b_cnt = tpb_cnt; m_b_en = tpb_en;
      m_b_we = tpb_we; m_b_din = tpb_din;
      m_up   = 1'b1;
    end
  end

  tp_ram #(.AW(TP_AW), .M(M)) u_tp_ram (
    .clk, .rst_n,
    .a_ld(m_a_ld), .a_addr(m_a_addr), .a_cnt(m_a_cnt), .a_up(m_up), .a_en(m_a_en),
    .a_we(m_a_we), .a_din(m_a_din), .a_dout(tpa_dout), .a_reg(a_reg),
    .b_ld(m_b_ld), .b_addr(m_b_addr), .b_cnt(m_b_cnt), .b_up(m_up), .b_en(m_b_en),
    .b_we(m_b_we), .b_din(m_b_din), .b_dout(tpb_dout), .b_reg(b_reg)
  );

  // -------------------------------------------------------------- register file
  regfile_prt #(.RAW(RF_AW), .M(M), .P(P), .COEF(COEF[2*M-1:0]), .XOR_TYPE(RF_XOR_TYPE),
                .LM(RF_LM), .LP(RF_LP), .LCOEF(RF_LCOEF)) u_rf (
    .clk, .rst_n,
    .test_mode(rf_test_mode),
    .wr_addr(rf_wr_addr), .din(rf_din), .rd_addr(rf_rd_addr),
    .wr_en(rf_wr_en), .rd_en(rf_rd_en), .dout(rf_dout),
    .addr_shift(rf_addr_shift), .addr_in(rf_addr_in), .addr_out(rf_addr_out),
    .scan_load(rf_scan_load), .scan_seed(rf_scan_seed), .scan_state(rf_scan_state)
  );

endmodule
