// tb_flash_bs_top: end-to-end test of the FLASH-BS Viterbi accelerator.
//
// Two accelerators decode the same random HMMs (sparse Erdos-Renyi style
// transition graph with a guaranteed ring so every state is reachable):
//   dut_b : beam width B = 4 < K, compared state by state with a
//           behavioural model of the same algorithm written here with
//           sort-based top-B selection (no heap);
//   dut_f : beam width B = K, whose decoded path must reach the exact
//           optimum log-likelihood found by a plain full-table Viterbi.
// Sequence lengths cover powers of two and odd lengths (all task shapes).
// Each DDR model stalls 20 % of the cycles. The test counts how often each
// mechanism happened (heap rules 1-3, double-buffer swaps, base and pruned
// initialisation, midpoint capture, root and search backtracking, beam
// misses, DDR back-pressure, two-, one- and no-child tasks) and fails for
// any that never did.
module tb_flash_bs_top;
  import flash_pkg::*;

  localparam int K = 16, M = 6, BN = 4, T_MAX = 40;
  localparam int WORDS = int'(mem_words(K, M, T_MAX));

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- DUTs and memories ----------------
  logic     start;
  time_t    seq_len;
  logic     busy_b, done_b, busy_f, done_f, rdy_b, rdy_f;
  mem_req_t req_b, req_f;
  mem_rsp_t rsp_b, rsp_f;
  int       nr_b, nw_b, ns_b, nr_f, nw_f, ns_f;

  flash_bs_top #(.K(K), .M(M), .B(BN), .T_MAX(T_MAX)) dut_b (
    .clk, .rst_n, .start, .seq_len, .busy(busy_b), .done(done_b),
    .ddr_req(req_b), .ddr_ready(rdy_b), .ddr_rsp(rsp_b));
  ddr_model #(.WORDS(WORDS), .LAT(5), .STALL_PCT(20)) mem_b (
    .clk, .rst_n, .req(req_b), .ready(rdy_b), .rsp(rsp_b),
    .n_reads(nr_b), .n_writes(nw_b), .n_stalls(ns_b));

  flash_bs_top #(.K(K), .M(M), .B(K), .T_MAX(T_MAX)) dut_f (
    .clk, .rst_n, .start, .seq_len, .busy(busy_f), .done(done_f),
    .ddr_req(req_f), .ddr_ready(rdy_f), .ddr_rsp(rsp_f));
  ddr_model #(.WORDS(WORDS), .LAT(3), .STALL_PCT(20)) mem_f (
    .clk, .rst_n, .req(req_f), .ready(rdy_f), .rsp(rsp_f),
    .n_reads(nr_f), .n_writes(nw_f), .n_stalls(ns_f));

  // ---------------- mechanism counters ----------------
  int c_direct, c_heapify, c_replace, c_reject, c_swap, c_init0, c_initp;
  int c_midcap, c_root, c_search, c_miss, c_two, c_one, c_none;
  always @(posedge clk) if (rst_n) begin
    c_direct  += dut_b.ev_direct;
    c_heapify += dut_b.ev_heapify;
    c_replace += dut_b.ev_replace;
    c_reject  += dut_b.ev_reject;
    c_swap    += dut_b.hs_swap;
    if (dut_b.init_start) begin
      if (dut_b.m_r == 0) c_init0++; else c_initp++;
    end
    if (dut_b.fm_start && dut_b.t_r == dut_b.tmid_r + 1) c_midcap++;
    if (dut_b.bt_start) begin
      if (dut_b.m_r == 0 && dut_b.n_r == dut_b.len_r - 1) c_root++; else c_search++;
    end
    c_miss += dut_b.bt_miss;
    if (dut_b.tq_valid && dut_b.tq_ready) begin
      if (dut_b.tq_task.n - dut_b.tq_task.m > 2) c_two++;
      else if (dut_b.tq_task.n - dut_b.tq_task.m == 2) c_one++;
      else c_none++;
    end
  end

  // ---------------- HMM data ----------------
  int pi_v [K];
  int a_v  [K][K];
  int b_v  [K][M];
  int x_v  [T_MAX];
  localparam int NINF = int'(NEG_INF);

  function automatic int add(int a, int b);
    if (a == NINF || b == NINF) return NINF;
    return a + b;
  endfunction

  task automatic gen_hmm(int edge_pct);
    for (int i = 0; i < K; i++) begin
      pi_v[i] = -int'($urandom % 400) - 1;
      for (int j = 0; j < K; j++)
        a_v[i][j] = (j == (i + 1) % K || ($urandom % 100) < edge_pct) ? -int'($urandom % 400) - 1 : NINF;
      for (int o = 0; o < M; o++) b_v[i][o] = -int'($urandom % 400) - 1;
    end
    for (int t = 0; t < T_MAX; t++) x_v[t] = int'($urandom % M);
  endtask

  task automatic load_mem();
    for (int i = 0; i < K; i++) begin
      mem_b.mem[int'(pi_base()) + i] = data_t'(pi_v[i]);
      mem_f.mem[int'(pi_base()) + i] = data_t'(pi_v[i]);
      for (int j = 0; j < K; j++) begin
        mem_b.mem[int'(a_base(K)) + i*K + j] = data_t'(a_v[i][j]);
        mem_f.mem[int'(a_base(K)) + i*K + j] = data_t'(a_v[i][j]);
      end
      for (int o = 0; o < M; o++) begin
        mem_b.mem[int'(b_base(K)) + i*M + o] = data_t'(b_v[i][o]);
        mem_f.mem[int'(b_base(K)) + i*M + o] = data_t'(b_v[i][o]);
      end
    end
    for (int t = 0; t < T_MAX; t++) begin
      mem_b.mem[int'(obs_base(K, M)) + t] = data_t'(x_v[t]);
      mem_f.mem[int'(obs_base(K, M)) + t] = data_t'(x_v[t]);
      mem_b.mem[int'(out_base(K, M, T_MAX)) + t] = '1;
      mem_f.mem[int'(out_base(K, M, T_MAX)) + t] = '1;
    end
  endtask

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

  // plain Viterbi: optimum log-likelihood
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

  // ---------------- one decode on both accelerators ----------------
  task automatic run_case(int T, int edge_pct);
    int exp_path [T_MAX];
    int got_b [T_MAX];
    int got_f [T_MAX];
    int opt, sc, cyc, mism;
    bit fin_b, fin_f;
    gen_hmm(edge_pct);
    load_mem();
    ref_decode(T, BN, exp_path);
    opt = vanilla_best(T);
    @(negedge clk);
    seq_len = time_t'(T);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    fin_b = 0; fin_f = 0; cyc = 0;
    while (!(fin_b && fin_f)) begin
      @(posedge clk);
      cyc++;
      if (done_b) fin_b = 1;
      if (done_f) fin_f = 1;
    end
    repeat (2) @(posedge clk);
    mism = 0;
    for (int t = 0; t < T; t++) begin
      got_b[t] = int'(mem_b.mem[int'(out_base(K, M, T_MAX)) + t]);
      got_f[t] = int'(mem_f.mem[int'(out_base(K, M, T_MAX)) + t]);
      checks++;
      if (got_b[t] != exp_path[t]) begin
        failures++; mism++;
        if (mism < 4) $display("T=%0d beam: q*[%0d]=%0d expected %0d", T, t, got_b[t], exp_path[t]);
      end
      checks++;
      if (got_f[t] < 0 || got_f[t] >= K) begin
        failures++;
        $display("T=%0d full: q*[%0d]=%0d out of range", T, t, got_f[t]);
        got_f[t] = 0;
      end
    end
    sc = path_score(T, got_f);
    checks++;
    if (sc != opt) begin
      failures++;
      $display("T=%0d full beam: path score %0d, optimum %0d", T, sc, opt);
    end
    $display("T=%0d: %0d cycles, optimum %0d, beam-%0d path score %0d", T, cyc, opt, BN, path_score(T, got_b));
  endtask

  initial begin
    start = 0;
    seq_len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case(8, 25);
    run_case(16, 25);
    run_case(13, 25);
    run_case(2, 25);
    run_case(3, 40);
    run_case(40, 25);
    run_case(27, 60);
    $display("mechanisms: direct=%0d heapify=%0d replace=%0d reject=%0d swap=%0d init_base=%0d init_pruned=%0d",
             c_direct, c_heapify, c_replace, c_reject, c_swap, c_init0, c_initp);
    $display("            midcap=%0d bt_root=%0d bt_search=%0d beam_miss=%0d stalls=%0d two=%0d one=%0d none=%0d",
             c_midcap, c_root, c_search, c_miss, ns_b + ns_f, c_two, c_one, c_none);
    checks++; if (c_direct  == 0) begin failures++; $display("never: direct insert"); end
    checks++; if (c_heapify == 0) begin failures++; $display("never: heapify"); end
    checks++; if (c_replace == 0) begin failures++; $display("never: root replace"); end
    checks++; if (c_reject  == 0) begin failures++; $display("never: reject"); end
    checks++; if (c_swap    == 0) begin failures++; $display("never: heap swap"); end
    checks++; if (c_init0   == 0) begin failures++; $display("never: base init"); end
    checks++; if (c_initp   == 0) begin failures++; $display("never: pruned init"); end
    checks++; if (c_midcap  == 0) begin failures++; $display("never: midpoint capture"); end
    checks++; if (c_root    == 0) begin failures++; $display("never: root backtrack"); end
    checks++; if (c_search  == 0) begin failures++; $display("never: search backtrack"); end
    checks++; if (c_miss    == 0) begin failures++; $display("never: beam miss"); end
    checks++; if (ns_b + ns_f == 0) begin failures++; $display("never: DDR stall"); end
    checks++; if (c_two == 0 || c_one == 0 || c_none == 0) begin failures++; $display("never: some task shape"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
