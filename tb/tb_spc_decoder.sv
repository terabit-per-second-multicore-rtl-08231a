// tb_spc_decoder: checks the single-parity-check shortcut for M = 8: hard decisions, and on
// odd parity the least reliable (first smallest magnitude) decision flipped.
module tb_spc_decoder;
  import mcsc_pkg::*;
  int checks = 0, failures = 0;
  llr_t [7:0] l;
  logic [7:0] x;
  spc_decoder #(.M(8)) dut (.l, .x);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int flips = 0;
    for (int t = 0; t < 400; t++) begin
      logic [7:0] e;
      int mi, par;
      mi = 0;
      par = 0;
      for (int i = 0; i < 8; i++) begin
        l[i].s = 1'($urandom);
        l[i].m = 4'($urandom_range(15, 1));
        e[i] = l[i].s;
        par ^= int'(l[i].s);
      end
      for (int i = 1; i < 8; i++) if (l[i].m < l[mi].m) mi = i;
      if (par != 0) begin
        e[mi] = ~e[mi];
        flips++;
      end
      #1;
      checks++;
      if (x !== e || ^x) begin
        failures++;
        if (failures < 5) $display("SPC mismatch x=%b exp=%b", x, e);
      end
    end
    if (flips == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
