// prt_pkg: shared types and default constants of the pseudo-ring (pi) memory test.
//
// The default field is GF(2^4) with generator p(x) = 1 + x + x^4; an element is a
// 4-bit cell. The virtual GLFSR that is pushed through the memory has K = 2 stages
// and the feedback polynomial q(z) = 1 + 2z + 2z^2, i.e. the next cell value is
// 2*r(i) XOR 2*r(i+1). The signature analyzer uses q(z) = 1 + z + 9z^2 (new stage =
// z-stage XOR 9*z^2-stage XOR input). These numbers are the paper's worked examples.
// A coefficient vector COEF is packed as COEF[j] = multiplier of stage j, where stage 0
// holds the most recently produced cell and stage K-1 the oldest one.
package prt_pkg;

  // Field and GLFSR defaults (GF(2^4), p(x) = x^4 + x + 1 -> low bits 4'b0011).
  localparam int unsigned M_DEF       = 4;
  localparam int unsigned K_DEF       = 2;
  localparam logic [3:0]  P_POLY_DEF  = 4'b0011;
  localparam logic [7:0]  COEF_DEF    = {4'h2, 4'h2};   // {stage1, stage0}: q(z) = 1+2z+2z^2
  localparam logic [7:0]  SA_COEF_DEF = {4'h9, 4'h1};   // {MSW, LSW}: q(z) = 1+z+9z^2

  // Trajectory of the virtual LFSR through the memory (generated by GenA).
  typedef enum logic [1:0] {
    TRAJ_UP     = 2'd0,
    TRAJ_DOWN   = 2'd1,
    TRAJ_PSEUDO = 2'd2
  } traj_e;

  // Pi-testing scheme for the single-port RAM.
  typedef enum logic {
    SCHEME_RING = 1'b0,   // memory cell is the feedback stage, ShReg holds read-back values
    SCHEME_SCAN = 1'b1    // all stages are memory cells, read into ShReg through Select
  } scheme_e;

  // Primitive polynomial taps (Fibonacci form, 1-based stage numbers, bit t-1 set for tap t)
  // for an address LFSR of width w; used for the pseudorandom trajectory.
  function automatic logic [23:0] lfsr_taps(input int unsigned w);
    case (w)
      2:  return 24'h000003;  // 2,1
      3:  return 24'h000006;  // 3,2
      4:  return 24'h00000C;  // 4,3
      5:  return 24'h000014;  // 5,3
      6:  return 24'h000030;  // 6,5
      7:  return 24'h000060;  // 7,6
      8:  return 24'h0000B8;  // 8,6,5,4
      9:  return 24'h000110;  // 9,5
      10: return 24'h000240;  // 10,7
      11: return 24'h000500;  // 11,9
      12: return 24'h000829;  // 12,6,4,1
      13: return 24'h00100D;  // 13,4,3,1
      14: return 24'h002015;  // 14,5,3,1
      15: return 24'h006000;  // 15,14
      16: return 24'h00D008;  // 16,15,13,4
      17: return 24'h012000;  // 17,14
      18: return 24'h020400;  // 18,11
      19: return 24'h040023;  // 19,6,2,1
      20: return 24'h090000;  // 20,17
      21: return 24'h140000;  // 21,19
      22: return 24'h300000;  // 22,21
      23: return 24'h420000;  // 23,18
      24: return 24'hE10000;  // 24,23,22,17
      default: return 24'h0;
    endcase
  endfunction

endpackage
