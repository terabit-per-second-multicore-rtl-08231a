// tb_mcsc_full: the same end-to-end test as tb_mcsc_top, but with the decoder at its
// default configuration: 4 cores, the (1024,854) code, 25 pipeline stages, 5-bit LLRs.
// A few frames per core are decoded; each output beat is checked against the reference SC
// decoder at exactly 4*(25+2) = 108 IO cycles after the frame's first beat.
module tb_mcsc_full;
  import mcsc_pkg::*;
  import tb_sc_ref_pkg::*;
  localparam int P = N_CORES, N = N_CW, K = K_INFO, D = DEPTH, LOGN = 10;
  localparam logic [NMAX-1:0] FZ = NMAX'(FROZEN_1024_854);
  localparam int NFRAMES = 10;
  localparam int OW = (K + P - 1) / P;
  localparam int LAT = P * (D + 2);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [P-1:0]          in_valid = '0;
  llr_t [P-1:0][N/P-1:0] llr_in;
  logic [$clog2(P)-1:0]  beat_idx;
  logic [P-1:0]          out_valid;
  logic [P-1:0][OW-1:0]  out_data;

  mcsc_top dut (
    .clk, .rst_n, .in_valid, .llr_in, .beat_idx, .out_valid, .out_data);

  always #5 clk = ~clk;
  initial begin
    repeat (NFRAMES * P + LAT + 400) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per frame and core: expected output word, valid flag, transmitted data, clean flag
  logic [P*OW-1:0] expd [NFRAMES][P];
  logic [P*OW-1:0] txd  [NFRAMES][P];
  logic            expv [NFRAMES][P];
  logic            clean[NFRAMES][P];
  llr_t [N-1:0]    frame[P];

  initial begin
    bit fz[], d[], x[], s[], dr[];
    int m[], qs[], cyc, f0cyc, sp;
    int decoded[P], corrected, bubbles, wrong_words;
    corrected = 0; bubbles = 0; wrong_words = 0;
    for (int c = 0; c < P; c++) decoded[c] = 0;
    qs = new[11];
    for (int i = 0; i < 11; i++) qs[i] = int'(QSCHED_ADAPTIVE[i]);
    pw_mask(LOGN, K, fz);
    checks++;
    for (int p = 0; p < N; p++) if (fz[p] != FZ[p]) begin failures++; break; end
    d = new[K];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cyc = 0;
    f0cyc = -1;
    while (1) begin
      // ---- drive ----
      if (beat_idx == 0 && f0cyc < 0) f0cyc = cyc;
      if (f0cyc >= 0 && (cyc - f0cyc) / P < NFRAMES) begin
        int f, b;
        f = (cyc - f0cyc) / P;
        b = (cyc - f0cyc) % P;
        if (b == 0) begin
          for (int c = 0; c < P; c++) begin
            int herr, derr;
            for (int j = 0; j < K; j++) d[j] = 1'($urandom);
            if (!sys_enc(d, fz, x)) failures++;
            sp = $urandom_range(3, 0);
            channel(x, 8, sp, s, m);
            for (int i = 0; i < N; i++) begin
              frame[c][i].s = s[i];
              frame[c][i].m = 4'(m[i]);
            end
            ref_decode(s, m, fz, qs, MAX_REP_DEF, MAX_SPC_DEF, dr);
            expd[f][c] = '0;
            txd[f][c] = '0;
            herr = 0; derr = 0;
            for (int j = 0; j < K; j++) begin
              expd[f][c][j] = dr[j];
              txd[f][c][j] = d[j];
              derr += (dr[j] != d[j]);
            end
            for (int i = 0; i < N; i++) herr += (s[i] != x[i]);
            expv[f][c] = ($urandom_range(7, 0) != 0);
            clean[f][c] = (sp == 0);
            if (expv[f][c] && herr > 0 && derr == 0) corrected++;
            if (expv[f][c] && derr > 0) wrong_words++;
            if (!expv[f][c]) bubbles++;
          end
        end
        for (int c = 0; c < P; c++) begin
          llr_in[c] = frame[c][b*(N/P) +: N/P];
          in_valid[c] = (b == 0) ? expv[f][c] : 1'($urandom);
        end
        checks++;
        if (int'(beat_idx) != b) failures++;
      end else begin
        in_valid = '0;
      end
      // ---- check outputs of this cycle ----
      if (f0cyc >= 0) begin
        int rel, f, b;
        rel = cyc - f0cyc - LAT;
        if (rel < 0) begin
          checks++;
          if (out_valid !== '0) failures++;
        end else if (rel / P < NFRAMES) begin
          f = rel / P;
          b = rel % P;
          for (int c = 0; c < P; c++) begin
            checks++;
            if (out_valid[c] !== expv[f][c] ||
                (expv[f][c] && out_data[c] !== expd[f][c][b*OW +: OW])) begin
              failures++;
              if (failures < 6) $display("frame %0d core %0d beat %0d: v=%b got %h exp %h", f, c, b,
                                         out_valid[c], out_data[c], expd[f][c][b*OW +: OW]);
            end
            if (expv[f][c] && clean[f][c]) begin
              checks++;
              if (out_data[c] !== txd[f][c][b*OW +: OW]) failures++;
            end
            if (expv[f][c] && b == 0) decoded[c]++;
          end
        end else break;
      end
      @(negedge clk);
      cyc++;
    end
    $display("latency %0d IO cycles; corrected %0d, uncorrectable %0d, bubbles %0d",
             LAT, corrected, wrong_words, bubbles);
    for (int c = 0; c < P; c++) begin
      $display("core %0d decoded %0d codewords", c, decoded[c]);
      if (decoded[c] == 0) failures++;
    end
    if (corrected == 0) failures++;
    if (bubbles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
