// tb_rep_decoder: checks the repetition shortcut (sign of the LLR sum, repeated) for M = 8.
module tb_rep_decoder;
  import mcsc_pkg::*;
  int checks = 0, failures = 0;
  llr_t [7:0] l;
  logic [7:0] x;
  rep_decoder #(.M(8)) dut (.l, .x);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ones = 0;
    for (int t = 0; t < 400; t++) begin
      int sum;
      sum = 0;
      for (int i = 0; i < 8; i++) begin
        l[i].s = 1'($urandom);
        l[i].m = 4'($urandom);
        sum += l[i].s ? -int'(l[i].m) : int'(l[i].m);
      end
      #1;
      checks++;
      if (x !== {8{sum < 0}}) begin
        failures++;
        if (failures < 5) $display("REP mismatch sum=%0d x=%b", sum, x);
      end
      ones += (sum < 0);
    end
    if (ones == 0 || ones == 400) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
