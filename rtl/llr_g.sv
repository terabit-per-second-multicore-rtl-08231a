// llr_g: the G (variable-node) function of successive-cancellation decoding for LANES pairs.
//
// Pair i: g = l[2i+1] + (1 - 2 z[i]) * l[2i], where z[i] is the re-encoded estimate fed
// back from the first recursion. In sign-magnitude form this is an add when the two
// effective signs agree and a subtract (sign of the larger) when they differ. The sum
// has one more magnitude bit than the inputs and is clamped to W bits for the next tree
// level by an llr_quantizer. A zero result is given a positive sign.
// Purely combinational.
module llr_g
  import mcsc_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned W     = 5
) (
  input  llr_t [2*LANES-1:0] l,
  input  logic [LANES-1:0]   z,
  output llr_t [LANES-1:0]   g
);
  llr_t [LANES-1:0] raw;
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic            sa, sb;
      logic [MAGW-1:0] ma, mb;
      logic [MAGW:0]   sum;
      sa = l[2*i].s ^ z[i];          // effective sign of the first LLR
      sb = l[2*i+1].s;
      ma = l[2*i].m;
      mb = l[2*i+1].m;
      if (sa == sb) begin
        sum = {1'b0, ma} + {1'b0, mb};
        raw[i].s = sb;
      end else if (mb >= ma) begin
        sum = {1'b0, mb} - {1'b0, ma};
        raw[i].s = sb & (mb != ma);
      end else begin
        sum = {1'b0, ma} - {1'b0, mb};
        raw[i].s = sa;
      end
      raw[i].m = sum[MAGW] ? '1 : sum[MAGW-1:0];
    end
  end
  llr_quantizer #(.LANES(LANES), .W(W)) u_q (.l(raw), .q(g));
endmodule
