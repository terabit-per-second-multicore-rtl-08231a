// spc_decoder: shortcut decoder for a single-parity-check segment of length M.
//
// An SPC segment has its first position frozen, so every valid re-encoded segment has
// even weight. The decoder takes the hard decision of every LLR (sign bit) and, when their
// parity is odd, flips the decision of the least reliable position (smallest magnitude,
// lowest index on ties). The output is the re-encoded segment. Purely combinational.
module spc_decoder
  import mcsc_pkg::*;
#(
  parameter int unsigned M = 8
) (
  input  llr_t [M-1:0] l,
  output logic [M-1:0] x
);
  logic [M-1:0]         hd;
  logic [MAGW-1:0]      minv;
  logic [$clog2(M)-1:0] mini;
  always_comb begin
    minv = '1;
    mini = '0;
    for (int i = 0; i < M; i++) begin
      hd[i] = l[i].s;
      if (l[i].m < minv || i == 0) begin
        minv = l[i].m;
        mini = ($clog2(M))'(i);
      end
    end
    x = hd;
    if (^hd) x[mini] = ~hd[mini];
  end
endmodule
