// tb_llr_f: checks the min-sum F function (sign XOR, smaller magnitude, clamp) on random pairs.
module tb_llr_f;
  import mcsc_pkg::*;
  int checks = 0, failures = 0;
  llr_t [15:0] l;
  llr_t [7:0]  f5, f3;
  llr_f #(.LANES(8), .W(5)) u5 (.l, .f(f5));
  llr_f #(.LANES(8), .W(3)) u3 (.l, .f(f3));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < 16; i++) begin
        l[i].s = 1'($urandom);
        l[i].m = 4'($urandom);
      end
      #1;
      for (int i = 0; i < 8; i++) begin
        int a, b, mn, es;
        a = l[2*i].s ? -int'(l[2*i].m) : int'(l[2*i].m);
        b = l[2*i+1].s ? -int'(l[2*i+1].m) : int'(l[2*i+1].m);
        mn = (a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
        es = int'(l[2*i].s) ^ int'(l[2*i+1].s);
        checks++;
        if (int'(f5[i].s) != es || int'(f5[i].m) != mn || int'(f3[i].s) != es
            || int'(f3[i].m) != (mn > 3 ? 3 : mn)) begin
          failures++;
          if (failures < 5) $display("F mismatch a=%0d b=%0d got %0d/%0d", a, b, f5[i].s, f5[i].m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
