// tb_flash_bs_sweep: the parameter sweeps of the evaluation, scaled down to
// a 64-state model so that all of them simulate in seconds.
//
// Four accelerators with beam widths B = 64 (= K, exact), 32, 16 and 8 decode
// the same random HMMs (|O| = 50, sparse random transition graph plus a ring
// so every state has a successor):
//   - edge probability p = 0.05, then steps of x1.5 up to 1 (0.05, 0.075,
//     0.113, 0.169, 0.253, 0.380, 0.570, 0.854, and 0.999 for 1) at T = 32;
//   - sequence length T = 32, 64, 128 at p = 0.253.
// Every decoded path is compared state by state with a behavioural model of
// the same beam algorithm (sort-based top-B selection). The B = K path must
// also reach the optimum of a plain full-table Viterbi. The memory has a
// fixed latency and no stalls, so cycle counts depend on the design only,
// and a decode must take fewer cycles with a narrower beam (the running
// time grows with B). The cycle count of every run is printed.
module tb_flash_bs_sweep;
  import flash_pkg::*;

  localparam int K = 64, M = 50, T_MAX = 128, NB = 4;
  localparam int WORDS = int'(mem_words(K, M, T_MAX));
  localparam int BW [NB] = '{64, 32, 16, 8};
  localparam int NINF = int'(NEG_INF);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     start;
  time_t    seq_len;
  logic     busy [NB];
  logic     done [NB];
  logic     rdy  [NB];
  mem_req_t req  [NB];
  mem_rsp_t rsp  [NB];
  int       nr [NB], nw [NB], ns [NB];

  flash_bs_top #(.K(K), .M(M), .B(BW[0]), .T_MAX(T_MAX)) dut0 (
    .clk, .rst_n, .start, .seq_len, .busy(busy[0]), .done(done[0]),
    .ddr_req(req[0]), .ddr_ready(rdy[0]), .ddr_rsp(rsp[0]));
  flash_bs_top #(.K(K), .M(M), .B(BW[1]), .T_MAX(T_MAX)) dut1 (
    .clk, .rst_n, .start, .seq_len, .busy(busy[1]), .done(done[1]),
    .ddr_req(req[1]), .ddr_ready(rdy[1]), .ddr_rsp(rsp[1]));
  flash_bs_top #(.K(K), .M(M), .B(BW[2]), .T_MAX(T_MAX)) dut2 (
    .clk, .rst_n, .start, .seq_len, .busy(busy[2]), .done(done[2]),
    .ddr_req(req[2]), .ddr_ready(rdy[2]), .ddr_rsp(rsp[2]));
  flash_bs_top #(.K(K), .M(M), .B(BW[3]), .T_MAX(T_MAX)) dut3 (
    .clk, .rst_n, .start, .seq_len, .busy(busy[3]), .done(done[3]),
    .ddr_req(req[3]), .ddr_ready(rdy[3]), .ddr_rsp(rsp[3]));

  ddr_model #(.WORDS(WORDS), .LAT(4), .STALL_PCT(0)) mem0 (
    .clk, .rst_n, .req(req[0]), .ready(rdy[0]), .rsp(rsp[0]), .n_reads(nr[0]), .n_writes(nw[0]), .n_stalls(ns[0]));
  ddr_model #(.WORDS(WORDS), .LAT(4), .STALL_PCT(0)) mem1 (
    .clk, .rst_n, .req(req[1]), .ready(rdy[1]), .rsp(rsp[1]), .n_reads(nr[1]), .n_writes(nw[1]), .n_stalls(ns[1]));
  ddr_model #(.WORDS(WORDS), .LAT(4), .STALL_PCT(0)) mem2 (
    .clk, .rst_n, .req(req[2]), .ready(rdy[2]), .rsp(rsp[2]), .n_reads(nr[2]), .n_writes(nw[2]), .n_stalls(ns[2]));
  ddr_model #(.WORDS(WORDS), .LAT(4), .STALL_PCT(0)) mem3 (
    .clk, .rst_n, .req(req[3]), .ready(rdy[3]), .rsp(rsp[3]), .n_reads(nr[3]), .n_writes(nw[3]), .n_stalls(ns[3]));

  // ---------------- HMM data ----------------
  int pi_v [K];
  int a_v  [K][K];
  int b_v  [K][M];
  int x_v  [T_MAX];

  function automatic int add(int a, int b);
    if (a == NINF || b == NINF) return NINF;
    return a + b;
  endfunction

  // edge probability in parts per thousand
  task automatic gen_hmm(int edge_pm);
    for (int i = 0; i < K; i++) begin
      pi_v[i] = -int'($urandom % 1000) - 1;
      for (int j = 0; j < K; j++)
        a_v[i][j] = (j == (i + 1) % K || ($urandom % 1000) < edge_pm) ? -int'($urandom % 1000) - 1 : NINF;
      for (int o = 0; o < M; o++) b_v[i][o] = -int'($urandom % 1000) - 1;
    end
    for (int t = 0; t < T_MAX; t++) x_v[t] = int'($urandom % M);
  endtask

  function automatic int word(int a);
    if (a < K) return pi_v[a];
    if (a < int'(b_base(K))) return a_v[(a - K) / K][(a - K) % K];
    if (a < int'(obs_base(K, M))) return b_v[(a - int'(b_base(K))) / M][(a - int'(b_base(K))) % M];
    if (a < int'(out_base(K, M, T_MAX))) return x_v[a - int'(obs_base(K, M))];
    return -1;
  endfunction

  task automatic load_mem();
    for (int a = 0; a < WORDS; a++) begin
      mem0.mem[a] = data_t'(word(a));
      mem1.mem[a] = data_t'(word(a));
      mem2.mem[a] = data_t'(word(a));
      mem3.mem[a] = data_t'(word(a));
    end
  endtask

  function automatic int read_out(int d, int t);
    int a;
    a = int'(out_base(K, M, T_MAX)) + t;
    case (d)
      0: return int'(mem0.mem[a]);
      1: return int'(mem1.mem[a]);
      2: return int'(mem2.mem[a]);
      default: return int'(mem3.mem[a]);
    endcase
  endfunction

  // ---------------- reference: same algorithm, sort-based beam ----------------
  typedef struct { int st; int pr; int md; } cand_t;

  function automatic bit cbetter(cand_t a, cand_t b);
    return (a.pr > b.pr) || (a.pr == b.pr && a.st < b.st);
  endfunction

  function automatic void keep_top(ref cand_t c[$], input int w);
    cand_t tmp;
    for (int i = 1; i < c.size(); i++)
      for (int k = i; k > 0 && cbetter(c[k], c[k-1]); k--) begin
        tmp = c[k]; c[k] = c[k-1]; c[k-1] = tmp;
      end
    while (c.size() > w) void'(c.pop_back());
  endfunction

  function automatic void ref_decode(int T, int w, ref int path[T_MAX]);
    int qm[$], qn[$];
    qm.push_back(0); qn.push_back(T - 1);
    while (qm.size() > 0) begin
      int m, n, tmid;
      cand_t cur[$], nxt[$];
      m = qm.pop_front(); n = qn.pop_front(); tmid = (m + n) / 2;
      cur.delete();
      for (int j = 0; j < K; j++) begin
        cand_t c;
        c.st = j; c.md = 0;
        c.pr = add((m == 0) ? pi_v[j] : a_v[path[m-1]][j], b_v[j][x_v[m]]);
        cur.push_back(c);
      end
      keep_top(cur, w);
      for (int t = m + 1; t <= n; t++) begin
        nxt.delete();
        for (int j = 0; j < K; j++) begin
          cand_t best, c;
          int bs;
          bs = 0;
          foreach (cur[e]) begin
            int s;
            s = add(cur[e].pr, a_v[cur[e].st][j]);
            if (e == 0 || s > bs || (s == bs && cur[e].st < best.st)) begin
              bs = s; best = cur[e];
            end
          end
          c.st = j;
          c.pr = add(bs, b_v[j][x_v[t]]);
          c.md = (t == tmid + 1) ? best.st : best.md;
          nxt.push_back(c);
        end
        keep_top(nxt, w);
        cur = nxt;
      end
      if (m == 0 && n == T - 1) begin
        path[n] = cur[0].st;
        path[tmid] = cur[0].md;
      end else begin
        int f;
        f = -1;
        foreach (cur[e]) if (cur[e].st == path[n]) f = e;
        path[tmid] = (f >= 0) ? cur[f].md : cur[0].md;
      end
      if (n - m > 2) begin
        qm.push_back(m); qn.push_back(tmid);
        qm.push_back(tmid + 1); qn.push_back(n);
      end else if (n - m == 2) begin
        qm.push_back(m); qn.push_back(tmid);
      end
    end
  endfunction

  function automatic int vanilla_best(int T);
    int d[K], nd[K], best;
    for (int j = 0; j < K; j++) d[j] = add(pi_v[j], b_v[j][x_v[0]]);
    for (int t = 1; t < T; t++) begin
      for (int j = 0; j < K; j++) begin
        int bs;
        bs = NINF;
        for (int i = 0; i < K; i++) if (add(d[i], a_v[i][j]) > bs) bs = add(d[i], a_v[i][j]);
        nd[j] = add(bs, b_v[j][x_v[t]]);
      end
      d = nd;
    end
    best = NINF;
    for (int j = 0; j < K; j++) if (d[j] > best) best = d[j];
    return best;
  endfunction

  function automatic int path_score(int T, int p[T_MAX]);
    int s;
    s = add(pi_v[p[0]], b_v[p[0]][x_v[0]]);
    for (int t = 1; t < T; t++) s = add(add(s, a_v[p[t-1]][p[t]]), b_v[p[t]][x_v[t]]);
    return s;
  endfunction

  // ---------------- one workload point on all four accelerators ----------------
  task automatic run_case(int T, int edge_pm);
    int exp_path [T_MAX];
    int got [T_MAX];
    int cyc [NB];
    int opt, sc, n, mism;
    bit fin [NB];
    gen_hmm(edge_pm);
    load_mem();
    opt = vanilla_best(T);
    @(negedge clk);
    seq_len = time_t'(T);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    foreach (fin[d]) begin fin[d] = 0; cyc[d] = 0; end
    n = 0;
    while (!(fin[0] && fin[1] && fin[2] && fin[3])) begin
      @(posedge clk);
      n++;
      for (int d = 0; d < NB; d++)
        if (done[d] && !fin[d]) begin fin[d] = 1; cyc[d] = n; end
    end
    repeat (2) @(posedge clk);
    for (int d = 0; d < NB; d++) begin
      ref_decode(T, BW[d], exp_path);
      mism = 0;
      for (int t = 0; t < T; t++) begin
        got[t] = read_out(d, t);
        checks++;
        if (got[t] != exp_path[t]) begin
          failures++; mism++;
          if (mism < 4) $display("p=%0d T=%0d B=%0d: q*[%0d]=%0d expected %0d", edge_pm, T, BW[d], t, got[t], exp_path[t]);
        end
        if (got[t] < 0 || got[t] >= K) got[t] = 0;
      end
      sc = path_score(T, got);
      if (d == 0) begin
        checks++;
        if (sc != opt) begin
          failures++;
          $display("p=%0d T=%0d B=K: path score %0d, optimum %0d", edge_pm, T, sc, opt);
        end
      end
      if (d > 0) begin
        checks++;
        if (cyc[d] >= cyc[d-1]) begin
          failures++;
          $display("p=%0d T=%0d: B=%0d took %0d cycles, not fewer than B=%0d (%0d)", edge_pm, T, BW[d], cyc[d], BW[d-1], cyc[d-1]);
        end
      end
      $display("p=0.%03d T=%0d B=%0d: %0d cycles, path score %0d (optimum %0d)", edge_pm, T, BW[d], cyc[d], sc, opt);
    end
  endtask

  localparam int NP = 9;
  localparam int EDGE_PM [NP] = '{50, 75, 113, 169, 253, 380, 570, 854, 999};

  initial begin
    start = 0;
    seq_len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NP; i++) run_case(32, EDGE_PM[i]);
    run_case(64, 253);
    run_case(128, 253);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
