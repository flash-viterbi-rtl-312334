// tb_output_path: backtracking and write-back. The testbench serves a
// heap_pre array on the row port and checks
//   - root mode: q*_n and q*_tmid taken from the best candidate,
//   - search mode: q*_tmid taken from the candidate whose state equals the
//     stored q*_n, with the target placed in the first, a middle and the
//     last (partial) row,
//   - a miss (target not in the beam): bt_miss and the best candidate's
//     MidState,
//   - the lookup ports and the write-back of the whole path to DDR.
module tb_output_path;
  import flash_pkg::*;
  localparam int K = 64, M = 3, T_MAX = 20, B = 19;
  localparam int WORDS = int'(mem_words(K, M, T_MAX));
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bt_start, bt_root, bt_done, bt_miss, wb_start, wb_done, rdy;
  time_t bt_n, bt_tmid, lk0_t, lk1_t, seq_len;
  state_t pre_count, row_addr, lk0_q, lk1_q;
  heap_entry_t row_data [LANES];
  mem_req_t req; mem_rsp_t rsp;
  int nr, nw, ns, misses;
  heap_entry_t pre [B];
  int expath [T_MAX];

  output_path #(.K(K), .M(M), .T_MAX(T_MAX)) dut (.clk, .rst_n, .bt_start, .bt_root, .bt_n, .bt_tmid,
    .pre_count, .row_addr, .row_data, .bt_done, .bt_miss, .lk0_t, .lk0_q, .lk1_t, .lk1_q,
    .wb_start, .seq_len, .mem_req(req), .mem_ready(rdy), .wb_done);
  ddr_model #(.WORDS(WORDS), .LAT(2), .STALL_PCT(30)) mem (.clk, .rst_n, .req, .ready(rdy), .rsp,
    .n_reads(nr), .n_writes(nw), .n_stalls(ns));

  always_comb
    for (int l = 0; l < LANES; l++)
      row_data[l] = (int'(row_addr) * LANES + l < B) ? pre[int'(row_addr) * LANES + l] : '0;

  always @(posedge clk) if (rst_n && bt_miss) misses++;

  function automatic int best_idx(int cnt);
    int b;
    b = 0;
    for (int e = 1; e < cnt; e++)
      if (pre[e].prob > pre[b].prob || (pre[e].prob == pre[b].prob && pre[e].state < pre[b].state)) b = e;
    return b;
  endfunction

  task automatic fill_pre(int cnt);
    int perm [$];
    for (int i = 0; i < K; i++) perm.push_back(i);
    perm.shuffle();
    for (int e = 0; e < B; e++) begin
      pre[e].state = state_t'(perm[e]);
      pre[e].prob = score_t'(-int'($urandom % 10));
      pre[e].mid = state_t'($urandom % K);
    end
  endtask

  task automatic bt(bit root, int n, int tmid, int cnt);
    @(negedge clk); bt_root = root; bt_n = time_t'(n); bt_tmid = time_t'(tmid);
    pre_count = state_t'(cnt); bt_start = 1;
    @(negedge clk); bt_start = 0;
    while (!bt_done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    int b, tgt, m0;
    bt_start = 0; bt_root = 0; bt_n = '0; bt_tmid = '0; pre_count = '0; lk0_t = '0; lk1_t = '0;
    wb_start = 0; seq_len = '0; misses = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // root task (0,19), tmid 9
    fill_pre(B);
    b = best_idx(B);
    expath[19] = int'(pre[b].state); expath[9] = int'(pre[b].mid);
    bt(1, 19, 9, B);
    // search tasks fill the rest: positions of the target vary
    for (int t = 0; t < T_MAX; t++) if (t != 19 && t != 9) begin
      int nn, cnt, pos;
      nn = (t < 9) ? 9 : 19;          // known later state
      cnt = 1 + int'($urandom % B);
      fill_pre(cnt);
      pos = (t % 3 == 0) ? 0 : (t % 3 == 1) ? cnt - 1 : cnt / 2;
      pre[pos].state = state_t'(expath[nn]);
      for (int e = 0; e < B; e++) if (e != pos && pre[e].state == state_t'(expath[nn])) pre[e].state = state_t'((expath[nn] + 1) % K);
      expath[t] = int'(pre[pos].mid);
      bt(0, nn, t, cnt);
    end
    // path check through the lookup ports
    for (int t = 0; t < T_MAX; t++) begin
      lk0_t = time_t'(t); lk1_t = time_t'(T_MAX - 1 - t); #1;
      checks++; if (int'(lk0_q) != expath[t]) begin failures++; $display("path[%0d]=%0d expected %0d", t, lk0_q, expath[t]); end
      checks++; if (int'(lk1_q) != expath[T_MAX-1-t]) begin failures++; $display("lk1 %0d", t); end
    end
    checks++; if (misses != 0) begin failures++; $display("unexpected miss"); end
    // a miss: the target state is absent from the beam
    fill_pre(B);
    for (int e = 0; e < B; e++) if (pre[e].state == state_t'(expath[19])) pre[e].state = state_t'((expath[19] + 7) % K);
    for (int e = 0; e < B; e++) for (int f = 0; f < e; f++) if (pre[e].state == pre[f].state) pre[e].state = state_t'(K - 1 - f);
    b = best_idx(B);
    m0 = int'(pre[b].mid);
    bt(0, 19, 3, B);
    expath[3] = m0;
    checks++; if (misses != 1) begin failures++; $display("miss not flagged (%0d)", misses); end
    lk0_t = 3; #1;
    checks++; if (int'(lk0_q) != m0) begin failures++; $display("miss fallback %0d expected %0d", lk0_q, m0); end
    // write-back
    @(negedge clk); seq_len = time_t'(T_MAX); wb_start = 1;
    @(negedge clk); wb_start = 0;
    while (!wb_done) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int t = 0; t < T_MAX; t++) begin
      checks++;
      if (int'(mem.mem[int'(out_base(K, M, T_MAX)) + t]) != expath[t]) begin
        failures++; $display("DDR q*[%0d]=%0d expected %0d", t, mem.mem[int'(out_base(K, M, T_MAX)) + t], expath[t]);
      end
    end
    checks++; if (nw != T_MAX) begin failures++; $display("%0d writes", nw); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
