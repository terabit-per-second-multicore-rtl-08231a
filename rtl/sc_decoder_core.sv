// sc_decoder_core: fully unrolled, pipelined SC decoder core for one (N,K) polar code.
//
// The core accepts the N channel LLRs of one codeword on every enabled cycle (en = core
// clock enable) and delivers the K decoded data bits D enabled cycles later, so its
// throughput is one codeword per core cycle. The channel LLRs are first clamped to the
// top-level width of the quantisation schedule, then decoded by the sc_node tree. The
// tree returns the re-encoded codeword estimate; because the code is systematic, the data
// bits are the codeword bits at the information (non-frozen) positions, taken in
// ascending position order. The frozen mask and the per-level LLR widths are parameters;
// the pipeline depth D is spread evenly over the decoding chain (see sc_node).
// A valid flag with synchronous active-low reset travels alongside the data.
module sc_decoder_core
  import mcsc_pkg::*;
#(
  parameter int unsigned     N       = N_CW,
  parameter int unsigned     K       = K_INFO,
  parameter int unsigned     D       = DEPTH,
  parameter logic [NMAX-1:0] FZ      = NMAX'(FROZEN_1024_854),
  parameter qsched_t         QS      = QSCHED_ADAPTIVE,
  parameter int unsigned     MAX_REP = MAX_REP_DEF,
  parameter int unsigned     MAX_SPC = MAX_SPC_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  llr_t [N-1:0] llr,
  input  logic         in_valid,
  output logic [K-1:0] data,
  output logic         out_valid
);
  localparam int unsigned LV = $clog2(N);
  localparam int TT = node_cost(FZ, int'(N), int'(MAX_REP), int'(MAX_SPC));

  llr_t [N-1:0] lq;
  logic [N-1:0] xhat;

  llr_quantizer #(.LANES(N), .W(int'(QS[LV]))) u_qin (.l(llr), .q(lq));

  sc_node #(.M(N), .FZ(FZ), .T0(0), .TT(TT), .D(D), .QS(QS),
            .MAX_REP(MAX_REP), .MAX_SPC(MAX_SPC)) u_root (.clk, .en, .l(lq), .x(xhat));

  // Systematic data extraction: j-th free position -> data[j].
  always_comb begin
    int j;
    j = 0;
    data = '0;
    for (int p = 0; p < N; p++) begin
      if (!FZ[p]) begin
        if (j < K) data[j] = xhat[p];
        j++;
      end
    end
  end

  logic [D-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else if (en) vpipe <= {vpipe[D-2:0], in_valid};
  end
  assign out_valid = vpipe[D-1];
endmodule
