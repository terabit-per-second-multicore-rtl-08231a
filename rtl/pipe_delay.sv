// pipe_delay: DEPTH enable-gated register stages for a W-bit bundle.
//
// Used for every pipeline register of the unrolled decoder and for the buffers that hold
// a node's LLRs while its first recursion decodes and hold the first recursion's estimate
// while the second one decodes. The registers advance only when en is high (the core
// clock enable), so a value moves one stage per core cycle. DEPTH = 0 is a plain wire.
// No reset: pipeline data is qualified by a separate valid flag.
module pipe_delay #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [DEPTH-1:0][W-1:0] r;
    always_ff @(posedge clk) begin
      if (en) begin
        r[0] <= d;
        for (int i = 1; i < int'(DEPTH); i++) r[i] <= r[i-1];
      end
    end
    assign q = r[DEPTH-1];
  end
endmodule
