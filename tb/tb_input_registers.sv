// tb_input_registers: N = 16 LLRs, P = 4 beats of 4 LLRs. Feeds random frames and checks
// that the holding register shows the whole frame, in beat order, right after the last
// beat, with the valid flag sampled on beat 0, and that it holds for a whole frame.
module tb_input_registers;
  import mcsc_pkg::*;
  localparam int N = 16, P = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [1:0] phase = 0;
  logic core_en;
  llr_t [N/P-1:0] beat_in;
  llr_t [N-1:0]   llr, frame;
  logic           llr_valid, fvalid, pvalid;
  llr_t [N-1:0]   pframe;
  assign core_en = (phase == 2'd3);
  input_registers #(.N(N), .P(P)) dut (.clk, .rst_n, .phase, .core_en, .in_valid, .beat_in,
                                       .llr, .llr_valid);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int nval;
    nval = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < 60; f++) begin
      for (int i = 0; i < N; i++) frame[i] = llr_t'($urandom);
      fvalid = 1'($urandom);
      for (int b = 0; b < P; b++) begin
        phase    = 2'(b);
        beat_in  = frame[b*4 +: 4];
        in_valid = (b == 0) ? fvalid : ~fvalid;
        @(negedge clk);
        if (b < P - 1 && f > 0) begin
          // previous frame still held while the current one shifts in
          checks++;
          if (llr_valid !== pvalid || llr !== pframe) failures++;
        end
      end
      // frame just completed: it must be in the holding register now
      checks++;
      if (llr !== frame || llr_valid !== fvalid) begin
        failures++;
        if (failures < 5) $display("frame %0d mismatch", f);
      end
      nval += fvalid;
      pvalid = fvalid;
      pframe = frame;
    end
    if (nval == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
