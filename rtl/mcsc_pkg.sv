// mcsc_pkg: types, constants and elaboration-time helpers shared by the multicore
// successive-cancellation (SC) polar decoder.
//
// LLRs travel in sign-magnitude form (sign bit set = negative LLR = bit 1 more likely),
// as the channel demapper delivers them. A stored LLR always has a 4-bit magnitude field;
// the adaptive quantisation of the internal LLRs is expressed by clamping the magnitude to
// the width chosen for the tree level, so unused upper bits become constant zero.
//
// Tree bookkeeping. An SC node of length M holds a frozen mask f[M-1:0] (1 = frozen) in
// the node's own order: the first recursion gets the even local positions, the second the
// odd ones, exactly as the odd/even split of the SC recursion. node_kind() classifies a
// node as Rate-0, Rate-1, repetition, single-parity-check or a plain split;
// node_cost() gives its length in abstract delay units. Pipeline registers are placed
// where the running delay crosses a multiple of TT/D (stage_of()), which spreads the D
// register stages evenly over the whole decoding chain (register reduction/balancing).
package mcsc_pkg;

  // Main configuration: 4 cores, (1024,854) code, 5-bit channel LLRs, depth 25.
  localparam int unsigned N_CW   = 1024;
  localparam int unsigned K_INFO = 854;
  localparam int unsigned Q_BITS = 5;
  localparam int unsigned N_CORES = 4;
  localparam int unsigned DEPTH  = 25;
  localparam int unsigned MAGW   = Q_BITS - 1;
  localparam int unsigned NMAX   = 1024;            // widest frozen mask handled

  typedef struct packed {
    logic             s;   // sign: 1 = negative
    logic [MAGW-1:0]  m;   // magnitude
  } llr_t;

  // Width of the LLRs entering a node of level l (length 2**l), sign included.
  // Entry l of the packed vector. Default: 5 bits down to length 32, 4 bits for 16 and 8,
  // 3 bits for 4 and 2, and the bare sign (1 bit) for single-bit decisions.
  typedef logic [10:0][2:0] qsched_t;
  localparam qsched_t QSCHED_ADAPTIVE = {3'd5, 3'd5, 3'd5, 3'd5, 3'd5, 3'd5,
                                         3'd4, 3'd4, 3'd3, 3'd3, 3'd1};
  localparam qsched_t QSCHED_FIXED5   = {11{3'd5}};

  // Frozen mask of the (1024,854) code, bit p = 1 when position p (decoder order) is
  // frozen. Polarisation-weight construction: position p has weight
  //   w(p) = sum_j p[j] * beta[9-j],  beta[j] = round(1024 * 2**(j/4))
  //        = {1024,1218,1448,1722,2048,2435,2896,3444,4096,4871}
  // and the 854 positions of largest weight (ties: larger p) carry information.
  localparam logic [1023:0] FROZEN_1024_854 = 1024'h0000000100010001000000010001011500000001000101150001011101110117000000010001011100010111010101170001010101010117000101170115151700000001000101110001010101010117000101010001011700010117011511170001010100010117000101150115111700010115011111170111011701171757;

  // Largest repetition and SPC segments decoded by a shortcut.
  localparam int unsigned MAX_REP_DEF = 16;
  localparam int unsigned MAX_SPC_DEF = 16;

  typedef enum logic [2:0] {NK_R0, NK_R1, NK_REP, NK_SPC, NK_SPLIT} node_kind_e;

  function automatic node_kind_e node_kind(logic [NMAX-1:0] f, int m, int max_rep, int max_spc);
    int nf;
    nf = 0;
    for (int i = 0; i < m; i++) nf += int'(f[i]);
    if (nf == m) return NK_R0;
    if (nf == 0) return NK_R1;
    if (m >= 2 && m <= max_rep && nf == m - 1 && !f[m-1]) return NK_REP;
    if (m >= 4 && m <= max_spc && nf == 1 && f[0]) return NK_SPC;
    return NK_SPLIT;
  endfunction

  // Frozen mask of a child: odd = 0 for the first recursion, 1 for the second.
  function automatic logic [NMAX-1:0] child_mask(logic [NMAX-1:0] f, int m, int odd);
    logic [NMAX-1:0] r;
    r = '0;
    for (int i = 0; i < m / 2; i++) r[i] = f[2*i + odd];
    return r;
  endfunction

  // Delay units: F = 1, G = 1, hard decision = 1, repetition / SPC = log2(M)+1
  // (adder or minimum tree plus decision), Rate-0 = 0, feedback XOR = 0.
  localparam int unsigned COST_F = 1;
  localparam int unsigned COST_G = 1;
  function automatic int node_cost(logic [NMAX-1:0] f, int m, int max_rep, int max_spc);
    node_kind_e k;
    k = node_kind(f, m, max_rep, max_spc);
    case (k)
      NK_R0:  return 0;
      NK_R1:  return 1;
      NK_REP, NK_SPC: return $clog2(m) + 1;
      default: return COST_F + COST_G
                      + node_cost(child_mask(f, m, 0), m / 2, max_rep, max_spc)
                      + node_cost(child_mask(f, m, 1), m / 2, max_rep, max_spc);
    endcase
  endfunction

  // Register stage reached at delay t when D stages are spread over a chain of TT units.
  function automatic int stage_of(int t, int d, int tt);
    return (t * d) / tt;
  endfunction

  // Clamp an LLR magnitude to a w-bit sign-magnitude word (w = 1: sign only).
  function automatic llr_t llr_sat(llr_t a, int w);
    llr_t r;
    int unsigned lim;
    lim = (1 << (w - 1)) - 1;
    r.s = a.s;
    r.m = (int'(a.m) > lim) ? MAGW'(lim) : a.m;
    return r;
  endfunction

endpackage
