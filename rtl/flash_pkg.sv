// flash_pkg: types, constants and helper functions shared by the FLASH-BS
// Viterbi accelerator.
//
// Scores are log-domain path probabilities held as signed fixed-point
// integers (the algorithm adds logarithms instead of multiplying
// probabilities). The most negative code stands for log(0) = -infinity and
// absorbs every addition, so sparse transition matrices can be stored with
// missing edges marked by NEG_INF. The word widths below are this design's
// own choice; the algorithm itself fixes none of them.
//
// A heap entry carries the three fields of a beam candidate: the state
// index, its accumulated path score (OptProb, the heap key) and the state it
// passed through at the division timestep (MidState). Candidates are ordered
// by score, and equal scores by the smaller state index, so that the set of
// the B best candidates is the same whatever order they arrive in.
//
// The DDR memory map (one DATA_W word per address) is also fixed here:
//   pi[j]        at PI_BASE  + j
//   logA[i][j]   at A_BASE   + i*K + j        (transition i -> j)
//   logB[j][o]   at B_BASE   + j*M + o        (emission of symbol o in j)
//   x[t]         at OBS_BASE + t
//   q*[t]        at OUT_BASE + t              (decoded sequence, written back)
package flash_pkg;

  localparam int SCORE_W = 32;  // log-probability word
  localparam int STATE_W = 16;  // state index, K up to 65536
  localparam int TIME_W  = 16;  // timestep index, T up to 65536
  localparam int OBS_W   = 16;  // observation symbol index
  localparam int ADDR_W  = 32;  // DDR word address
  localparam int DATA_W  = 32;  // DDR data word
  // Number of DDR words fetched per request and processed together by
  // FINDMAX ("multiple data groups ... in a single clock cycle").
  localparam int LANES   = 8;

  typedef logic signed [SCORE_W-1:0] score_t;
  typedef logic [STATE_W-1:0]        state_t;
  typedef logic [TIME_W-1:0]         time_t;
  typedef logic [OBS_W-1:0]          obs_t;
  typedef logic [ADDR_W-1:0]         addr_t;
  typedef logic [DATA_W-1:0]         data_t;

  localparam score_t NEG_INF   = {1'b1, {(SCORE_W-1){1'b0}}};
  localparam score_t SCORE_MAX = {1'b0, {(SCORE_W-1){1'b1}}};

  // One beam candidate (Fig. 5: State, OptProb, MidState).
  typedef struct packed {
    state_t state;
    score_t prob;
    state_t mid;
  } heap_entry_t;

  // One subtask: decode the segment m..n.
  typedef struct packed {
    time_t m;
    time_t n;
  } task_t;

  // DDR request from a client: LANES independent word addresses (gather),
  // or a single-word write carried on lane 0.
  typedef struct packed {
    logic                           valid;
    logic                           we;
    logic [LANES-1:0]               lane_en;
    logic [LANES-1:0][ADDR_W-1:0]   addr;
    data_t                          wdata;
  } mem_req_t;

  // DDR read response, in request order.
  typedef struct packed {
    logic                           valid;
    logic [LANES-1:0][DATA_W-1:0]   data;
  } mem_rsp_t;

  // Log-domain multiply: saturating add with -infinity absorbing.
  function automatic score_t sat_add(score_t a, score_t b);
    logic signed [SCORE_W:0] s;
    if (a == NEG_INF || b == NEG_INF) return NEG_INF;
    s = {a[SCORE_W-1], a} + {b[SCORE_W-1], b};
    if (s > $signed({1'b0, SCORE_MAX})) return SCORE_MAX;
    if (s <= $signed({1'b1, NEG_INF}))  return NEG_INF;
    return s[SCORE_W-1:0];
  endfunction

  // Strict total order on candidates: a is better than b.
  function automatic logic better(score_t pa, state_t sa, score_t pb, state_t sb);
    return (pa > pb) || ((pa == pb) && (sa < sb));
  endfunction

  function automatic logic entry_better(heap_entry_t a, heap_entry_t b);
    return better(a.prob, a.state, b.prob, b.state);
  endfunction

  // Memory map.
  function automatic addr_t pi_base();
    return '0;
  endfunction
  function automatic addr_t a_base(int k);
    return addr_t'(k);
  endfunction
  function automatic addr_t b_base(int k);
    return addr_t'(k) + addr_t'(k) * addr_t'(k);
  endfunction
  function automatic addr_t obs_base(int k, int m);
    return b_base(k) + addr_t'(k) * addr_t'(m);
  endfunction
  function automatic addr_t out_base(int k, int m, int t_max);
    return obs_base(k, m) + addr_t'(t_max);
  endfunction
  function automatic addr_t mem_words(int k, int m, int t_max);
    return out_base(k, m, t_max) + addr_t'(t_max);
  endfunction

endpackage
