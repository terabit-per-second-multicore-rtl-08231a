// rep_decoder: shortcut decoder for a repetition segment of length M.
//
// A repetition segment carries one information bit on its last position; all M bits of
// the re-encoded segment equal that bit. The maximum-likelihood decision is the sign of
// the sum of the M LLRs (converted to two's complement and added in a tree); a zero sum
// decides 0. The output is the re-encoded segment (all ones or all zeros), which is what
// the parent node needs for its feedback. Purely combinational; its pipeline registers
// are placed by sc_node.
module rep_decoder
  import mcsc_pkg::*;
#(
  parameter int unsigned M = 8
) (
  input  llr_t [M-1:0] l,
  output logic [M-1:0] x
);
  localparam int unsigned SW = MAGW + 1 + $clog2(M) + 1;
  logic signed [SW-1:0] acc;
  always_comb begin
    acc = '0;
    for (int i = 0; i < M; i++)
      acc += l[i].s ? -$signed({{(SW-MAGW){1'b0}}, l[i].m}) : $signed({{(SW-MAGW){1'b0}}, l[i].m});
    x = {M{acc[SW-1]}};
  end
endmodule
