// tb_output_registers: K = 10 bits, P = 4 beats of 3 bits (2 padding bits). Loads random
// words on the core enable and checks the four beats that follow and their valid flag.
module tb_output_registers;
  localparam int K = 10, P = 4, OW = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, core_en = 0, valid_in = 0;
  logic [K-1:0]  data_in = 0;
  logic          out_valid;
  logic [OW-1:0] out_beat;
  output_registers #(.K(K), .P(P)) dut (.clk, .rst_n, .core_en, .data_in, .valid_in,
                                        .out_valid, .out_beat);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [P*OW-1:0] w;
    logic            v;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < 60; f++) begin
      // cycle with core_en: load
      data_in  = K'($urandom);
      valid_in = 1'($urandom);
      core_en  = 1;
      w = (P*OW)'(data_in);
      v = valid_in;
      @(negedge clk);
      core_en = 0;
      data_in = K'($urandom);
      for (int b = 0; b < P; b++) begin
        checks++;
        if (out_beat !== w[b*OW +: OW] || out_valid !== v) begin
          failures++;
          if (failures < 5) $display("word %0d beat %0d got %b exp %b", f, b, out_beat, w[b*OW +: OW]);
        end
        if (b < P - 1) @(negedge clk);
        else core_en = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
