// glfsr_feedback_lanes: XOR block made of independent LFSR lanes.
//
// The second kind of XOR block for a register file: a cell of M bits is split into
// M/LM lanes of LM bits, and each lane is its own K-stage LFSR over GF(2^LM)
// (homogeneous when all lanes share coefficients, heterogeneous otherwise). This
// suits faults inside a word; the single GLFSR over GF(2^M) (glfsr_feedback) mixes
// the bits of a word and suits faults between words. Lane l, stage j uses the
// coefficient LCOEF[(l*K + j)*LM +: LM]; LP holds the low LM bits of the lane field
// polynomial. Default: four one-bit lanes with q(z) = 1 + z + z^2 over GF(2),
// which is one 2-input XOR gate per bit. Combinational.
module glfsr_feedback_lanes #(
  parameter int unsigned K  = 2,
  parameter int unsigned M  = 4,
  parameter int unsigned LM = 1,
  parameter logic [LM-1:0] LP = LM'(1'b1),
  parameter logic [M*K-1:0] LCOEF = '1
) (
  input  logic [K-1:0][M-1:0] stage,
  output logic [M-1:0]        y
);

  localparam int unsigned LANES = M / LM;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [K-1:0][LM-1:0] lst;
    for (genvar j = 0; j < K; j++) begin : g_st
      assign lst[j] = stage[j][l*LM +: LM];
    end
    glfsr_feedback #(
      .K(K), .M(LM), .P(LP), .COEF(LCOEF[l*K*LM +: K*LM])
    ) u_lane (
      .stage(lst),
      .y    (y[l*LM +: LM])
    );
  end

endmodule
