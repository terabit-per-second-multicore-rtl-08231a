// llr_quantizer: adaptive LLR quantisation of one tree level.
//
// Clamps each of LANES sign-magnitude LLRs to a W-bit word (one sign bit, W-1 magnitude
// bits): magnitudes above 2**(W-1)-1 saturate, the sign is kept. W = 1 keeps the sign
// alone, which is all a single-bit hard decision needs. Deeper tree levels use fewer
// bits because polarisation makes their LLRs either very reliable or irrelevant; the
// per-level widths are a parameter of the decoder (mcsc_pkg::QSCHED_ADAPTIVE), chosen by
// this design, since only their range (1 to 5 bits) is fixed.
// Purely combinational.
module llr_quantizer
  import mcsc_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned W     = 3
) (
  input  llr_t [LANES-1:0] l,
  output llr_t [LANES-1:0] q
);
  always_comb begin
    for (int i = 0; i < LANES; i++) q[i] = llr_sat(l[i], int'(W));
  end
endmodule
