// tb_sc_decoder_core: a (128,96) core with 6 pipeline stages. Systematically encoded random
// data goes through a noisy BPSK channel (noise level varies per codeword); one codeword
// is accepted per enabled cycle, with a random enable. Each result must equal the
// reference SC decoder exactly D = 6 enabled cycles later and keep its valid flag;
// noiseless codewords must return the transmitted data.
module tb_sc_decoder_core;
  import mcsc_pkg::*;
  import tb_sc_ref_pkg::*;
  localparam int N = 128, K = 96, D = 6;
  localparam logic [NMAX-1:0] FZ = NMAX'(128'h00010111011101170101011701171557);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, out_valid;
  llr_t [N-1:0] llr;
  logic [K-1:0] data;
  logic [K-1:0] exp_q [$];
  logic         expv_q [$];
  logic [K-1:0] tx_q [$];
  logic         clean_q [$];
  sc_decoder_core #(.N(N), .K(K), .D(D), .FZ(FZ)) dut (.clk, .rst_n, .en, .llr, .in_valid,
                                                       .data, .out_valid);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    bit fz[], d[], x[], s[], dr[];
    int m[], qs[];
    logic [K-1:0] e, tx;
    int corrected, sp;
    corrected = 0;
    qs = new[11];
    for (int i = 0; i < 11; i++) qs[i] = int'(QSCHED_ADAPTIVE[i]);
    pw_mask(7, K, fz);
    checks++;
    for (int p = 0; p < N; p++) if (fz[p] != FZ[p]) begin failures++; break; end
    d = new[K];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      if (exp_q.size() >= D) begin
        checks++;
        if (out_valid !== expv_q[exp_q.size() - D] ||
            (out_valid && data !== exp_q[exp_q.size() - D])) begin
          failures++;
          if (failures < 5) $display("t=%0d mismatch v=%b", t, out_valid);
        end
        if (out_valid && clean_q[exp_q.size() - D]) begin
          checks++;
          if (data !== tx_q[exp_q.size() - D]) failures++;
        end
      end else begin
        checks++;
        if (out_valid !== 1'b0) failures++;
      end
      en = ($urandom_range(4, 0) != 0);
      in_valid = ($urandom_range(5, 0) != 0);
      for (int j = 0; j < K; j++) d[j] = 1'($urandom);
      if (!sys_enc(d, fz, x)) failures++;
      sp = $urandom_range(3, 0);
      channel(x, 8, sp, s, m);
      for (int i = 0; i < N; i++) begin
        llr[i].s = s[i];
        llr[i].m = 4'(m[i]);
      end
      if (en) begin
        int herr, derr;
        ref_decode(s, m, fz, qs, MAX_REP_DEF, MAX_SPC_DEF, dr);
        herr = 0; derr = 0;
        for (int j = 0; j < K; j++) begin
          e[j] = dr[j];
          tx[j] = d[j];
          derr += (dr[j] != d[j]);
        end
        for (int i = 0; i < N; i++) herr += (s[i] != x[i]);
        if (herr > 0 && derr == 0) corrected++;
        exp_q.push_back(e);
        expv_q.push_back(in_valid);
        tx_q.push_back(tx);
        clean_q.push_back(sp == 0);
      end
      @(negedge clk);
    end
    $display("codewords with channel errors corrected: %0d", corrected);
    if (corrected == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
