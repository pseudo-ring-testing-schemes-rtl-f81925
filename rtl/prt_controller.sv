// prt_controller: pi-test (pseudo-ring test) controller for a single-port RAM.
//
// One pi-iteration emulates a K-stage GLFSR over GF(2^M) with the memory cells
// themselves: the virtual register sits on K consecutive cells of the trajectory
// given by GenA, and each shift writes the feedback value into the next cell, so the
// register moves across the memory while the data stay put. The iteration has the
// paper's four phases: initialisation (seed written into the first K cells),
// pushing (one shift per remaining cell), unloading (final state into ShReg) and
// analysis (final state compared with `expected`).
//
// Two schemes, selected by `scheme` at `start`:
//  * ring: the memory cell is the feedback stage. Per cell t: write
//    XOR-block(ShReg) at A(t), read it back, shift the read word into ShReg.
//    ShReg thus always holds the last K words as read from the RAM.
//  * scan: all K stages are memory cells. Per cell t: read A(t-K) .. A(t-1) one per
//    clock, the Select logic steers each word into its ShReg stage, then write
//    XOR-block(ShReg) at A(t). Unloading re-reads the last K cells.
// The fourth control parameter, data inversion, is `inv_in` (every word written is
// complemented) and `inv_out` (every word read is complemented before use); with
// both set the memory holds the complement of the linear GLFSR sequence.
//
// Iteration length: `last_pos` is the trajectory position of the last cell, so an
// iteration covers last_pos + 1 cells (all 2**AW when it is all ones; at least K+1).
// With `cmp_init` the final state is compared with the seed instead of `expected`:
// when the number of shifts (last_pos + 1 - K) is a multiple of the period of q(z),
// a fault-free memory brings the virtual register back to its initial state.
// The polynomial is fixed by COEF, or, with PROG_POLY = 1, taken from `coef` at
// each start (general multipliers instead of constant ones); `coef` is unused when
// PROG_POLY = 0. All controls, the seed and `expected` are sampled at `start`.
//
// Every word read (after output inversion) is also offered to the signature
// analyzer on `rd_valid`/`rd_data`. `seed[j]` and `expected[j]`/`final_state[j]` use
// stage numbering: stage 0 = most recent cell, stage K-1 = oldest; the seed is
// written oldest first. `start` is taken when not `busy`; `done` pulses for one
// clock with `pass` and `final_state` valid, and both are held until the next start.
// Timing, from the edge that takes `start` to the edge that raises `done`, for
// N = last_pos + 1 cells: ring 4*N + 2 clocks (write, read, capture, step per cell); scan
// 2*K + (N-K)*(K+3) + K + 3 clocks (K reads, wait, write, step per shift; the
// seed cells take write and step only).
// Which stages feed the XOR block, the clocks per shift, the RAM read latency of
// one clock and the handshake are this design's choices; the paper gives the schemes
// and the phases, not their timing.
module prt_controller
  import prt_pkg::*;
#(
  parameter int unsigned AW = 11,
  parameter int unsigned M  = 4,
  parameter int unsigned K  = 2,
  parameter logic [M-1:0]   P    = M'(P_POLY_DEF),
  parameter logic [K*M-1:0] COEF = (K*M)'(COEF_DEF),
  parameter bit             PROG_POLY = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  // control parameters of one pi-iteration
  input  logic                start,
  input  scheme_e             scheme,
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
  // GenA
  output logic                ag_start,
  output logic                ag_step,
  input  logic [AW-1:0]       ag_addr,
  // RAM port (registered read, one clock latency)
  output logic                ram_en,
  output logic                ram_rw,
  output logic [AW-1:0]       ram_a,
  output logic [M-1:0]        ram_d,
  input  logic [M-1:0]        ram_q,
  // read stream towards the signature analyzer
  output logic                rd_valid,
  output logic [M-1:0]        rd_data
);

  localparam int unsigned   KW     = (K > 1) ? $clog2(K) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_START, S_WRITE, S_READ, S_CAPT, S_SRD, S_SWAIT, S_NEXT, S_ANALYZE
  } state_e;

  state_e                   state;
  scheme_e                  scheme_q;
  logic                     inv_in_q, inv_out_q;
  logic [AW-1:0]            t;            // trajectory position being written
  logic                     unload;       // scan: reading the final state
  logic [K-1:0][M-1:0]      shreg;        // ShReg, copy of the virtual register
  logic [K-1:0][AW-1:0]     hist;         // addresses A(t-1) .. A(t-K)
  logic [KW-1:0]            rd_idx;       // scan: stage being read
  logic                     cap_vld;      // scan: a read issued last clock
  logic [KW-1:0]            cap_idx;      // scan: its stage (Select)
  logic                     ring_cap;     // ring: read issued last clock
  logic [M-1:0]             fb;
  logic [M-1:0]             q_eff;
  logic [M-1:0]             wdata;
  logic [AW-1:0]            last_q;       // position of the last cell
  logic                     cmp_init_q;
  logic [K-1:0][M-1:0]      ref_q;        // state the final state is compared with

  if (PROG_POLY) begin : g_prog
    logic [K-1:0][M-1:0] coef_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                        coef_q <= COEF;
      else if (state == S_IDLE && start) coef_q <= coef;
    end
    glfsr_feedback_prog #(.K(K), .M(M), .P(P)) u_xor (
      .stage(shreg),
      .coef (coef_q),
      .y    (fb)
    );
  end else begin : g_fixed
    glfsr_feedback #(.K(K), .M(M), .P(P), .COEF(COEF)) u_xor (
      .stage(shreg),
      .y    (fb)
    );
  end

  assign q_eff = ram_q ^ {M{inv_out_q}};

  // The seed as it reads back from the RAM (both inversions applied), kept for the
  // Init = Fin comparison.
  logic [K-1:0][M-1:0] seed_q, seed_rd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        seed_q <= '0;
    else if (state == S_IDLE && start) seed_q <= seed;
  end
  always_comb
    for (int j = 0; j < K; j++) seed_rd[j] = seed_q[j] ^ {M{inv_in_q ^ inv_out_q}};

  // Word written at position t: the seed during initialisation, else the feedback.
  always_comb begin
    wdata = fb;
    if (t < AW'(K)) wdata = seed_q[K - 1 - int'(t)];
    wdata = wdata ^ {M{inv_in_q}};
  end

  // RAM and GenA drive.
  always_comb begin
    ram_en   = 1'b0;
    ram_rw   = 1'b0;
    ram_a    = ag_addr;
    ram_d    = wdata;
    ag_start = (state == S_START);
    ag_step  = 1'b0;
    unique case (state)
      S_WRITE: begin ram_en = 1'b1; ram_rw = 1'b1; end
      S_READ:  begin ram_en = 1'b1; end
      S_SRD:   begin ram_en = 1'b1; ram_a = hist[rd_idx]; end
      S_NEXT:  ag_step = (t != last_q);
      default: ;
    endcase
  end

  assign rd_valid = ring_cap | cap_vld;
  assign rd_data  = q_eff;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      scheme_q    <= SCHEME_RING;
      inv_in_q    <= 1'b0;
      inv_out_q   <= 1'b0;
      last_q      <= '1;
      cmp_init_q  <= 1'b0;
      ref_q       <= '0;
      t           <= '0;
      unload      <= 1'b0;
      shreg       <= '0;
      hist        <= '0;
      rd_idx      <= '0;
      cap_vld     <= 1'b0;
      cap_idx     <= '0;
      ring_cap    <= 1'b0;
      done        <= 1'b0;
      pass        <= 1'b0;
      final_state <= '0;
    end else begin
      done     <= 1'b0;
      ring_cap <= (state == S_READ);
      cap_vld  <= (state == S_SRD);
      cap_idx  <= rd_idx;
      // Select: a word read in scan mode goes to the stage whose address was read.
      if (cap_vld) shreg[cap_idx] <= q_eff;
      unique case (state)
        S_IDLE: if (start) begin
          scheme_q  <= scheme;
          inv_in_q  <= inv_in;
          inv_out_q <= inv_out;
          last_q    <= (last_pos < AW'(K)) ? AW'(K) : last_pos;
          cmp_init_q <= cmp_init;
          ref_q     <= expected;
          t         <= '0;
          unload    <= 1'b0;
          state     <= S_START;
        end
        S_START: state <= S_WRITE;         // GenA presents A(0)
        // scan: positions K.. are preceded by reading the K stage cells
        S_WRITE: state <= (scheme_q == SCHEME_RING) ? S_READ : S_NEXT;
        S_READ:  state <= S_CAPT;
        S_CAPT: begin                      // ring: read-back word enters ShReg
          for (int j = K - 1; j > 0; j--) shreg[j] <= shreg[j-1];
          shreg[0] <= q_eff;
          state    <= S_NEXT;
        end
        S_NEXT: begin                      // advance along the trajectory
          for (int j = K - 1; j > 0; j--) hist[j] <= hist[j-1];
          hist[0] <= ag_addr;
          t       <= t + 1'b1;
          if (t == last_q) begin
            if (scheme_q == SCHEME_SCAN) begin
              unload <= 1'b1;
              rd_idx <= KW'(K - 1);
              state  <= S_SRD;
            end else begin
              state <= S_ANALYZE;
            end
          end else if (scheme_q == SCHEME_SCAN && t + 1'b1 >= AW'(K)) begin
            rd_idx <= KW'(K - 1);
            state  <= S_SRD;
          end else begin
            state <= S_WRITE;
          end
        end
        S_SRD: begin                       // scan: read stage cells, oldest first
          if (rd_idx == '0) state  <= S_SWAIT;
          else              rd_idx <= rd_idx - 1'b1;
        end
        S_SWAIT: state <= unload ? S_ANALYZE : S_WRITE;
        S_ANALYZE: begin
          final_state <= shreg;
          // Init = Fin: when the number of shifts is a multiple of the period the
          // final state must equal the seed (both taken as read, after inversion).
          pass        <= cmp_init_q ? (shreg == seed_rd) : (shreg == ref_q);
          done        <= 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
