// scma_pkg: sizes, types and the factor graph shared by every module of the
// Max-Log SCMA decoder.
//
// The decoder serves the regular SCMA code with K = 4 resources (subcarriers),
// N = 2 non-zero dimensions per user and J = C(K,2) = 6 users, each user
// sending one of M = 4 codewords per frame. In the regular form the columns
// of the factor-graph matrix are the N-of-K patterns in lexicographic order,
// which for K = 4 gives
//     F = [1 1 1 0 0 0; 1 0 0 1 1 0; 0 1 0 1 0 1; 0 0 1 0 1 1].
// The functions below derive every routing table of the decoder from that
// rule, so the wiring of the message networks is computed, not typed in.
//
// Numbers: received samples and codebook entries are 8-bit signed per real or
// imaginary part; all beliefs are 16-bit signed log-domain values (both as in
// the paper). Adders that produce beliefs saturate to the 16-bit range.
//
// Naming: an "edge" is one connection of the factor graph, numbered
// e = k*DF + s, where k is the resource and s the slot (0..DF-1) of the user
// among the users of resource k, in increasing user order. The combination
// index of a resource is c = m_slot0*M*M + m_slot1*M + m_slot2.
//
// A block linted on its own uses only part of this package, so a linter
// reports the constants and tables that block does not need as unused
// parameters. Each one is used elsewhere in the decoder.
package scma_pkg;

  localparam int K      = 4;          // resources (resource nodes)
  localparam int N      = 2;          // non-zero dimensions per user
  localparam int J      = 6;          // users (layer nodes) = C(K,N)
  localparam int M      = 4;          // codewords per user
  localparam int MB     = 2;          // log2(M): bits per user per frame
  localparam int DF     = 3;          // users per resource
  localparam int NE     = K * DF;     // edges of the factor graph = 12
  localparam int NCOMB  = M * M * M;  // codeword combinations per resource
  localparam int NOTH   = M * M;      // combinations of the two other users
  localparam int IN_W   = 8;          // input quantization
  localparam int BEL_W  = 16;         // intermediate (belief) quantization
  localparam int CB_N   = J * M * N * 2; // codebook entries = 96
  localparam int CB_AW  = 7;          // codebook address width
  localparam int COEF_W = 16;         // distributed-matrix inverse coefficient
  localparam int COEF_F = 12;         // ... of which fraction bits
  localparam int N0_W   = 16;         // 1/N0, unsigned
  localparam int N0_F   = 8;          // ... of which fraction bits
  localparam int ITER_W = 3;          // iteration counter width (I_max <= 7)
  localparam int SH_W   = 4;          // width of alpha/beta/epsilon shifts

  typedef logic signed [IN_W-1:0]   sample_t;
  typedef logic signed [BEL_W-1:0]  belief_t;
  typedef belief_t [M-1:0]          bvec_t;    // one message: M beliefs
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic [MB-1:0]            sym_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Initial-probability variant of the Max-Log decoder:
  // EXACT   P = -(1/N0)*|d|^2     APPROX1 P = -(1/N0)*|d|
  // APPROX2 P = -|d|^2            APPROX3 P = -|d|
  // with d = y_k - (x_k,1 + x_k,2 + x_k,3).
  typedef enum logic [1:0] {
    EXACT   = 2'd0,
    APPROX1 = 2'd1,
    APPROX2 = 2'd2,
    APPROX3 = 2'd3
  } approx_e;

  localparam belief_t BEL_MAX = belief_t'(2**(BEL_W-1) - 1);
  localparam belief_t BEL_MIN = belief_t'(-(2**(BEL_W-1)));

  // Saturate a wide signed value to the belief range.
  function automatic belief_t sat_bel(input logic signed [31:0] v);
    if (v > 32'(BEL_MAX))      return BEL_MAX;
    else if (v < 32'(BEL_MIN)) return BEL_MIN;
    else                       return belief_t'(v);
  endfunction

  // ---- factor graph of the regular code (N = 2) -------------------------
  // Resource of dimension d (0 or 1) of user j: user j is the j-th pair
  // (r0 < r1) in lexicographic order.
  function automatic int user_res(input int j, input int d);
    int n;
    n = 0;
    for (int a = 0; a < K; a++)
      for (int b = a + 1; b < K; b++) begin
        if (n == j) return (d == 0) ? a : b;
        n++;
      end
    return 0;
  endfunction

  // User on slot s of resource k.
  function automatic int res_user(input int k, input int s);
    int n;
    n = 0;
    for (int j = 0; j < J; j++)
      if (user_res(j, 0) == k || user_res(j, 1) == k) begin
        if (n == s) return j;
        n++;
      end
    return 0;
  endfunction

  // Slot of user j on resource k.
  function automatic int user_slot(input int j, input int k);
    for (int s = 0; s < DF; s++)
      if (res_user(k, s) == j) return s;
    return 0;
  endfunction

  // Dimension (0/1) of user j that lands on resource k.
  function automatic int user_dim(input int j, input int k);
    return (user_res(j, 0) == k) ? 0 : 1;
  endfunction

  // Edge of user j's dimension d.
  function automatic int user_edge(input int j, input int d);
    return user_res(j, d) * DF + user_slot(j, user_res(j, d));
  endfunction

  // Edge on the other resource of the user of edge e (the "swop" partner).
  function automatic int partner_edge(input int e);
    int j;
    j = res_user(e / DF, e % DF);
    return (user_edge(j, 0) == e) ? user_edge(j, 1) : user_edge(j, 0);
  endfunction

  // The two slots of resource k other than slot s, in increasing order.
  function automatic int other_slot(input int s, input int which);
    int n;
    n = 0;
    for (int t = 0; t < DF; t++)
      if (t != s) begin
        if (n == which) return t;
        n++;
      end
    return 0;
  endfunction

  // Codebook address of user j, codeword m, dimension d, real (ri=0) or
  // imaginary (ri=1) part.
  function automatic int cb_index(input int j, input int m, input int d, input int ri);
    return ((j * M + m) * N + d) * 2 + ri;
  endfunction

  // Combination index on a resource from the three slot codewords.
  function automatic int comb_idx(input int m0, input int m1, input int m2);
    return (m0 * M + m1) * M + m2;
  endfunction

  // ---- routing tables, evaluated once at elaboration ----------------------
  typedef int user_tbl_t [J*N];
  typedef int res_tbl_t  [K*DF];
  typedef int edge_tbl_t [NE];

  function automatic user_tbl_t f_user_edge_tbl();
    user_tbl_t t;
    for (int j = 0; j < J; j++)
      for (int d = 0; d < N; d++) t[j*N+d] = user_edge(j, d);
    return t;
  endfunction

  function automatic res_tbl_t f_res_user_tbl();
    res_tbl_t t;
    for (int k = 0; k < K; k++)
      for (int s = 0; s < DF; s++) t[k*DF+s] = res_user(k, s);
    return t;
  endfunction

  function automatic res_tbl_t f_res_dim_tbl();
    res_tbl_t t;
    for (int k = 0; k < K; k++)
      for (int s = 0; s < DF; s++) t[k*DF+s] = user_dim(res_user(k, s), k);
    return t;
  endfunction

  function automatic edge_tbl_t f_partner_tbl();
    edge_tbl_t t;
    for (int e = 0; e < NE; e++) t[e] = partner_edge(e);
    return t;
  endfunction

  localparam user_tbl_t USER_EDGE = f_user_edge_tbl();  // edge of (user j, dim d) at j*N+d
  localparam res_tbl_t  RES_USER  = f_res_user_tbl();   // user on (resource k, slot s) at k*DF+s
  localparam res_tbl_t  RES_DIM   = f_res_dim_tbl();    // that user's dimension on k
  localparam edge_tbl_t PARTNER   = f_partner_tbl();    // swop partner edge

endpackage
