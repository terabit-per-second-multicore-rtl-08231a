// tb_pipe_delay: checks that data moves one stage per enabled cycle through 3 stages,
// holds when the enable is low, and that DEPTH = 0 is transparent.
module tb_pipe_delay;
  int checks = 0, failures = 0;
  logic clk = 0, en = 0;
  logic [7:0] d = 0, q, q0;
  logic [7:0] hist [$];
  pipe_delay #(.W(8), .DEPTH(3)) dut (.clk, .en, .d, .q);
  pipe_delay #(.W(8), .DEPTH(0)) dut0 (.clk, .en, .d, .q(q0));
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int nen;
    nen = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if (hist.size() >= 3) begin
        checks++;
        if (q !== hist[hist.size()-3]) begin
          failures++;
          if (failures < 5) $display("delay mismatch t=%0d q=%0d exp=%0d", t, q, hist[hist.size()-3]);
        end
      end
      d  = 8'($urandom);
      en = 1'($urandom);
      #1;
      checks++;
      if (q0 !== d) failures++;
      if (en) begin
        hist.push_back(d);
        nen++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
