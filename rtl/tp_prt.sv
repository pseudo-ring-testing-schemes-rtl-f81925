// tp_prt: pi-test sequencer for the two-port RAM (tp_ram).
//
// With two ports and a two-stage virtual GLFSR the register needs no ShReg copy:
// both stages are read in the same clock. One shift is the march element
//   { r(i), r(i+1), w(i+2)( c0*r(i+1) XOR c1*r(i) ) }
// and takes two clocks:
//   R: port A reads cell i, port B reads cell i+1; RgAddrB counts to i+2.
//   W: port B writes the XOR block result into cell i+2; RgAddrA counts to i+1.
// The default XOR block is q(z) = 1 + 2z + 2z^2 over GF(2^4), the paper's example,
// whose sequence from seed (0, 1) runs 0, 1, 2, 6, 8, F, E, ... with period 255.
// Initialisation writes the seed into the first two cells with both ports in one
// clock; unloading reads the last two cells; analysis compares them with
// `expected`. The trajectory is counting up (`down` = 0) or down, since the address
// registers are counters; `inv_in`/`inv_out` complement the words written/read.
// Stage numbering as elsewhere: [0] = most recent cell, [1] = older one.
// Handshake: `start` when not `busy`; `done` pulses one clock with `pass` and
// `final_state`. For N = 2**AW cells, 2*(N-2) + 4 clocks pass from the edge that
// takes `start` to the edge that raises `done`.
module tp_prt
  import prt_pkg::*;
#(
  parameter int unsigned AW = 11,
  parameter int unsigned M  = 4,
  parameter logic [M-1:0]   P    = M'(P_POLY_DEF),
  parameter logic [2*M-1:0] COEF = (2*M)'(COEF_DEF)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                down,
  input  logic                inv_in,
  input  logic                inv_out,
  input  logic [1:0][M-1:0]   seed,
  input  logic [1:0][M-1:0]   expected,
  output logic                busy,
  output logic                done,
  output logic                pass,
  output logic [1:0][M-1:0]   final_state,
  // to tp_ram
  output logic                a_ld,
  output logic [AW-1:0]       a_addr,
  output logic                a_cnt,
  output logic                a_en,
  output logic                a_we,
  output logic [M-1:0]        a_din,
  input  logic [M-1:0]        a_dout,
  output logic                b_ld,
  output logic [AW-1:0]       b_addr,
  output logic                b_cnt,
  output logic                b_en,
  output logic                b_we,
  output logic [M-1:0]        b_din,
  input  logic [M-1:0]        b_dout,
  output logic                up
);

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_INIT, S_READ, S_WRITE, S_UREAD, S_ANALYZE
  } state_e;

  state_e              state;
  logic                down_q, inv_in_q, inv_out_q;
  logic [AW-1:0]       wpos;          // trajectory position of the next write
  logic [1:0][M-1:0]   rd;            // words read, after output inversion
  logic [M-1:0]        fb;

  assign rd[0] = b_dout ^ {M{inv_out_q}};   // cell i+1, most recent stage
  assign rd[1] = a_dout ^ {M{inv_out_q}};   // cell i

  glfsr_feedback #(.K(2), .M(M), .P(P), .COEF(COEF)) u_xor (
    .stage(rd),
    .y    (fb)
  );

  assign up   = !down_q;
  assign busy = (state != S_IDLE);

  always_comb begin
    a_ld   = 1'b0;  a_addr = down_q ? '1 : '0;
    b_ld   = 1'b0;  b_addr = down_q ? AW'({AW{1'b1}} - 1'b1) : AW'(1);
    a_cnt  = 1'b0;  b_cnt  = 1'b0;
    a_en   = 1'b0;  b_en   = 1'b0;
    a_we   = 1'b0;  b_we   = 1'b0;
    a_din  = seed[1] ^ {M{inv_in_q}};
    b_din  = seed[0] ^ {M{inv_in_q}};
    unique case (state)
      S_LOAD:  begin a_ld = 1'b1; b_ld = 1'b1; end
      S_INIT:  begin a_en = 1'b1; a_we = 1'b1; b_en = 1'b1; b_we = 1'b1; end
      S_READ:  begin a_en = 1'b1; b_en = 1'b1; b_cnt = 1'b1; end
      S_WRITE: begin
        b_en = 1'b1; b_we = 1'b1; a_cnt = 1'b1;
        b_din = fb ^ {M{inv_in_q}};
      end
      S_UREAD: begin a_en = 1'b1; b_en = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      down_q      <= 1'b0;
      inv_in_q    <= 1'b0;
      inv_out_q   <= 1'b0;
      wpos        <= '0;
      done        <= 1'b0;
      pass        <= 1'b0;
      final_state <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          down_q    <= down;
          inv_in_q  <= inv_in;
          inv_out_q <= inv_out;
          state     <= S_LOAD;
        end
        S_LOAD:  state <= S_INIT;
        S_INIT: begin                      // cells 0 and 1 now hold the seed
          wpos  <= AW'(2);
          state <= S_READ;
        end
        S_READ:  state <= S_WRITE;
        S_WRITE: begin
          wpos  <= wpos + 1'b1;
          state <= (wpos == '1) ? S_UREAD : S_READ;
        end
        S_UREAD: state <= S_ANALYZE;       // A = N-2, B = N-1 on the trajectory
        S_ANALYZE: begin
          final_state <= rd;
          pass        <= (rd == expected);
          done        <= 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
