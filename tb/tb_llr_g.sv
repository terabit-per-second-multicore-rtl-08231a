// tb_llr_g: checks the G function l[2i+1] + (1-2z) l[2i] with saturation on random inputs.
module tb_llr_g;
  import mcsc_pkg::*;
  int checks = 0, failures = 0;
  llr_t [15:0] l;
  logic [7:0]  z;
  llr_t [7:0]  g5, g4;
  llr_g #(.LANES(8), .W(5)) u5 (.l, .z, .g(g5));
  llr_g #(.LANES(8), .W(4)) u4 (.l, .z, .g(g4));
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
        if (l[i].m == 0) l[i].s = 1'b0;
      end
      z = 8'($urandom);
      #1;
      for (int i = 0; i < 8; i++) begin
        int a, b, v, mag, gv5, gv4;
        a = l[2*i].s ? -int'(l[2*i].m) : int'(l[2*i].m);
        b = l[2*i+1].s ? -int'(l[2*i+1].m) : int'(l[2*i+1].m);
        v = b + (z[i] ? -a : a);
        mag = v < 0 ? -v : v;
        gv5 = g5[i].s ? -int'(g5[i].m) : int'(g5[i].m);
        gv4 = g4[i].s ? -int'(g4[i].m) : int'(g4[i].m);
        checks++;
        if (gv5 != (v < 0 ? -(mag > 15 ? 15 : mag) : (mag > 15 ? 15 : mag))
            || gv4 != (v < 0 ? -(mag > 7 ? 7 : mag) : (mag > 7 ? 7 : mag))
            || (v == 0 && g5[i].s)) begin
          failures++;
          if (failures < 5) $display("G mismatch a=%0d b=%0d z=%0d got %0d", a, b, z[i], gv5);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
