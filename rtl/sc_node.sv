// sc_node: one node of the fully unrolled, pipelined successive-cancellation (SC) tree.
//
// A node receives the M LLRs of its code segment and returns the re-encoded estimate x of
// the segment (the vector the SC recursion hands back to its parent). Its frozen mask FZ
// (bit i = local position i frozen) decides, at elaboration, what hardware it becomes:
//   Rate-0 (all frozen)            x = 0
//   Rate-1 (no frozen bit)         x = hard decisions of the LLRs
//   repetition (only last free)    rep_decoder
//   single parity check (only first frozen) spc_decoder
//   otherwise                      split, following the SC recursion:
//       f = F(l[2i], l[2i+1])            -> first child  (even local positions of FZ)
//       g = G(l[2i], l[2i+1], z)         -> second child (odd local positions of FZ)
//       x[2i] = z[i] ^ x2[i], x[2i+1] = x2[i]
// where z and x2 are the estimates of the first and second child. A node instantiates
// itself for its children, so the tree unrolls completely at elaboration.
//
// Pipelining (register reduction/balancing): every operation occupies an interval of the
// decoder's single chain of TT delay units, starting at T0 for this node. An operation
// from t_s to t_e is followed by stage_of(t_e)-stage_of(t_s) registers, so the whole
// decoder holds exactly D register stages spread evenly along the chain. The node's LLRs
// are delayed until the G operation and the first child's estimate until the feedback
// XOR, each by the number of stages crossed meanwhile. Registers advance on en.
// Latency: stage_of(T0+cost) - stage_of(T0) core cycles, a compile-time constant.
module sc_node
  import mcsc_pkg::*;
#(
  parameter int unsigned     M       = 8,
  parameter logic [NMAX-1:0] FZ      = NMAX'('h17),
  parameter int unsigned     T0      = 0,
  parameter int unsigned     TT      = 8,
  parameter int unsigned     D       = 2,
  parameter qsched_t         QS      = QSCHED_ADAPTIVE,
  parameter int unsigned     MAX_REP = MAX_REP_DEF,
  parameter int unsigned     MAX_SPC = MAX_SPC_DEF
) (
  input  logic         clk,
  input  logic         en,
  input  llr_t [M-1:0] l,
  output logic [M-1:0] x
);
  localparam node_kind_e KIND = node_kind(FZ, int'(M), int'(MAX_REP), int'(MAX_SPC));
  localparam int COST = node_cost(FZ, int'(M), int'(MAX_REP), int'(MAX_SPC));
  localparam int S0   = stage_of(int'(T0), int'(D), int'(TT));
  localparam int SEND = stage_of(int'(T0) + COST, int'(D), int'(TT));

  if (KIND == NK_R0) begin : g_r0
    assign x = '0;
  end else if (KIND == NK_R1) begin : g_r1
    logic [M-1:0] hd;
    always_comb for (int i = 0; i < M; i++) hd[i] = l[i].s;
    pipe_delay #(.W(M), .DEPTH(SEND - S0)) u_d (.clk, .en, .d(hd), .q(x));
  end else if (KIND == NK_REP) begin : g_rep
    logic [M-1:0] xr;
    rep_decoder #(.M(M)) u_rep (.l, .x(xr));
    pipe_delay #(.W(M), .DEPTH(SEND - S0)) u_d (.clk, .en, .d(xr), .q(x));
  end else if (KIND == NK_SPC) begin : g_spc
    logic [M-1:0] xs;
    spc_decoder #(.M(M)) u_spc (.l, .x(xs));
    pipe_delay #(.W(M), .DEPTH(SEND - S0)) u_d (.clk, .en, .d(xs), .q(x));
  end else begin : g_split
    localparam int unsigned H = M / 2;
    localparam int unsigned LV = $clog2(M);
    localparam logic [NMAX-1:0] FZ0 = child_mask(FZ, int'(M), 0);
    localparam logic [NMAX-1:0] FZ1 = child_mask(FZ, int'(M), 1);
    localparam int C0 = node_cost(FZ0, int'(H), int'(MAX_REP), int'(MAX_SPC));
    localparam int T_L  = int'(T0) + int'(COST_F);     // first child starts
    localparam int T_G  = T_L + C0;                    // G starts
    localparam int T_R  = T_G + int'(COST_G);          // second child starts
    localparam int S_L  = stage_of(T_L, int'(D), int'(TT));
    localparam int S_G  = stage_of(T_G, int'(D), int'(TT));
    localparam int S_R  = stage_of(T_R, int'(D), int'(TT));

    llr_t [H-1:0] f_c, f_r, g_c, g_r;
    llr_t [M-1:0] l_d;
    logic [H-1:0] z, z_d, x2;

    llr_f #(.LANES(H), .W(int'(QS[LV-1]))) u_f (.l, .f(f_c));
    pipe_delay #(.W(H*$bits(llr_t)), .DEPTH(S_L - S0)) u_fd (.clk, .en, .d(f_c), .q(f_r));

    sc_node #(.M(H), .FZ(FZ0), .T0(T_L), .TT(TT), .D(D), .QS(QS),
              .MAX_REP(MAX_REP), .MAX_SPC(MAX_SPC)) u_first (.clk, .en, .l(f_r), .x(z));

    pipe_delay #(.W(M*$bits(llr_t)), .DEPTH(S_G - S0)) u_ld (.clk, .en, .d(l), .q(l_d));
    llr_g #(.LANES(H), .W(int'(QS[LV-1]))) u_g (.l(l_d), .z, .g(g_c));
    pipe_delay #(.W(H*$bits(llr_t)), .DEPTH(S_R - S_G)) u_gd (.clk, .en, .d(g_c), .q(g_r));

    sc_node #(.M(H), .FZ(FZ1), .T0(T_R), .TT(TT), .D(D), .QS(QS),
              .MAX_REP(MAX_REP), .MAX_SPC(MAX_SPC)) u_second (.clk, .en, .l(g_r), .x(x2));

    pipe_delay #(.W(H), .DEPTH(SEND - S_G)) u_zd (.clk, .en, .d(z), .q(z_d));
    always_comb begin
      for (int i = 0; i < H; i++) begin
        x[2*i]   = z_d[i] ^ x2[i];
        x[2*i+1] = x2[i];
      end
    end
  end
endmodule
