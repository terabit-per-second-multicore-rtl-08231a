// tb_llr_quantizer: checks the per-level LLR clamp for widths 1, 3 and 5 on random words.
module tb_llr_quantizer;
  import mcsc_pkg::*;
  int checks = 0, failures = 0;
  llr_t [7:0] l, q1, q3, q5;
  llr_quantizer #(.LANES(8), .W(1)) u1 (.l, .q(q1));
  llr_quantizer #(.LANES(8), .W(3)) u3 (.l, .q(q3));
  llr_quantizer #(.LANES(8), .W(5)) u5 (.l, .q(q5));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < 8; i++) begin
        l[i].s = 1'($urandom);
        l[i].m = 4'($urandom);
      end
      #1;
      for (int i = 0; i < 8; i++) begin
        int e1, e3;
        e1 = 0;
        e3 = (l[i].m > 3) ? 3 : int'(l[i].m);
        checks++;
        if (q1[i].s !== l[i].s || int'(q1[i].m) != e1 || q3[i].s !== l[i].s || int'(q3[i].m) != e3
            || q5[i] !== l[i]) begin
          failures++;
          if (failures < 5) $display("mismatch lane %0d in=%0d/%0d q3=%0d", i, l[i].s, l[i].m, q3[i].m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
