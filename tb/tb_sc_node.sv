// tb_sc_node: a length-16 SC subtree ((16,8) polarisation-weight code, repetition and SPC
// shortcuts up to length 4) with 3 pipeline stages. Random LLR vectors are applied with a
// random enable; every output is compared with the reference SC model for the vector
// applied exactly 3 enabled cycles earlier (the node's latency).
module tb_sc_node;
  import mcsc_pkg::*;
  import tb_sc_ref_pkg::*;
  localparam int M = 16, D = 3;
  localparam logic [NMAX-1:0] FZ = NMAX'(16'h1557);
  localparam int TT = node_cost(FZ, M, 4, 4);
  int checks = 0, failures = 0;
  logic clk = 0, en = 0;
  llr_t [M-1:0] l;
  logic [M-1:0] x;
  logic [M-1:0] exp_q [$];
  sc_node #(.M(M), .FZ(FZ), .T0(0), .TT(TT), .D(D), .QS(QSCHED_ADAPTIVE),
            .MAX_REP(4), .MAX_SPC(4)) dut (.clk, .en, .l, .x);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    bit fz[], s[], xr[], fzc[];
    int m[], qs[];
    logic [M-1:0] e;
    int nonzero;
    nonzero = 0;
    qs = new[11];
    for (int i = 0; i < 11; i++) qs[i] = int'(QSCHED_ADAPTIVE[i]);
    pw_mask(4, 8, fz);
    checks++;
    for (int p = 0; p < M; p++) if (fz[p] != FZ[p]) begin failures++; break; end
    s = new[M]; m = new[M];
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      if (exp_q.size() >= D) begin
        e = exp_q[exp_q.size() - D];
        checks++;
        if (x !== e) begin
          failures++;
          if (failures < 5) $display("t=%0d x=%b exp=%b", t, x, e);
        end
        nonzero += (x != 0);
      end
      en = ($urandom_range(3, 0) != 0);
      for (int i = 0; i < M; i++) begin
        m[i] = $urandom_range(7, 0);
        s[i] = (m[i] == 0) ? 1'b0 : 1'($urandom);
        l[i].s = s[i];
        l[i].m = 4'(m[i]);
      end
      if (en) begin
        ref_sc(s, m, fz, qs, 4, 4, xr);
        for (int i = 0; i < M; i++) e[i] = xr[i];
        exp_q.push_back(e);
      end
    end
    if (nonzero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
