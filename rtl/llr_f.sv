// llr_f: the F (check-node) function of successive-cancellation decoding for LANES pairs.
//
// For pair i the inputs are l[2i] and l[2i+1] (the odd/even split of the SC recursion);
// the output is the min-sum approximation: sign = product of the signs (XOR of the sign
// bits), magnitude = smaller magnitude. The result is clamped to W bits for the next
// tree level by an llr_quantizer. Purely combinational.
module llr_f
  import mcsc_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned W     = 5
) (
  input  llr_t [2*LANES-1:0] l,
  output llr_t [LANES-1:0]   f
);
  llr_t [LANES-1:0] raw;
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      raw[i].s = l[2*i].s ^ l[2*i+1].s;
      raw[i].m = (l[2*i].m < l[2*i+1].m) ? l[2*i].m : l[2*i+1].m;
    end
  end
  llr_quantizer #(.LANES(LANES), .W(W)) u_q (.l(raw), .q(f));
endmodule
