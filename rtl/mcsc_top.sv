// mcsc_top: multicore successive-cancellation (MCSC) polar decoder.
//
// P identical decoder slices run side by side, each decoding its own codewords. The
// interface runs on one IO clock (f_IO); each slice's core advances once every P IO
// cycles (core clock f_c = f_IO / P), expressed here as a clock enable core_en that is
// high on the last beat of every P-beat frame. A slice is: input_registers (N*Q/P LLR
// pins, shift register), sc_decoder_core (unrolled SC tree of depth D core cycles) and
// output_registers (ceil(K/P) output pins). The pin count therefore stays that of a
// single core however many cores there are, while the clocked pipeline of each core
// runs P times slower.
//
// Interface: beat_idx tells the source which beat of the current frame is taken this
// cycle (0..P-1); llr_in[c] is the beat for core c, in_valid[c] marks the codeword of
// core c valid when sampled on beat 0. out_data[c] / out_valid[c] deliver the decoded bits
// of core c, beat 0 first, in step with beat_idx.
// Timing: a codeword whose beat 0 enters in IO cycle t leaves with beat 0 in IO cycle
// t + P*(D+2): one core cycle in the input registers, D in the core, one in the output
// registers. All cores share the same core clock phase.
module mcsc_top
  import mcsc_pkg::*;
#(
  parameter int unsigned     P  = N_CORES,
  parameter int unsigned     N  = N_CW,
  parameter int unsigned     K  = K_INFO,
  parameter int unsigned     D  = DEPTH,
  parameter logic [NMAX-1:0] FZ = NMAX'(FROZEN_1024_854),
  parameter qsched_t         QS = QSCHED_ADAPTIVE,
  parameter int unsigned     OW = (K + P - 1) / P
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [P-1:0]              in_valid,
  input  llr_t [P-1:0][N/P-1:0]     llr_in,
  output logic [$clog2(P)-1:0]      beat_idx,
  output logic [P-1:0]              out_valid,
  output logic [P-1:0][OW-1:0]      out_data
);
  logic [$clog2(P)-1:0] phase;
  logic                 core_en;

  always_ff @(posedge clk) begin
    if (!rst_n)                    phase <= '0;
    else if (phase == ($clog2(P))'(P - 1)) phase <= '0;
    else                           phase <= phase + 1'b1;
  end
  assign core_en  = (phase == ($clog2(P))'(P - 1));
  assign beat_idx = phase;

  for (genvar c = 0; c < int'(P); c++) begin : g_core
    llr_t [N-1:0] llr;
    logic         llr_valid, dec_valid;
    logic [K-1:0] dec;

    input_registers #(.N(N), .P(P)) u_in (
      .clk, .rst_n, .phase, .core_en, .in_valid(in_valid[c]), .beat_in(llr_in[c]),
      .llr, .llr_valid);

    sc_decoder_core #(.N(N), .K(K), .D(D), .FZ(FZ), .QS(QS)) u_core (
      .clk, .rst_n, .en(core_en), .llr, .in_valid(llr_valid),
      .data(dec), .out_valid(dec_valid));

    output_registers #(.K(K), .P(P), .OW(OW)) u_out (
      .clk, .rst_n, .core_en, .data_in(dec), .valid_in(dec_valid),
      .out_valid(out_valid[c]), .out_beat(out_data[c]));
  end
endmodule
