// tb_findmax: checks one dynamic-programming timestep. The testbench holds
// a heap_pre array (served on the row port) and the HMM in a stalling DDR
// model, and for every state j computes the expected best predecessor
// score, the added emission score and the MidState rule (predecessor's
// State on the step after the division point, its MidState otherwise).
// Candidate counts that fill a row exactly, partly and not at all are
// used, and the consumer is not always ready.
module tb_findmax;
  import flash_pkg::*;
  localparam int K = 12, M = 5, B = 12, T_MAX = 8;
  localparam int WORDS = int'(mem_words(K, M, T_MAX));
  localparam int NINF = int'(NEG_INF);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, mid_capture, out_valid, out_ready, done, busy, rdy;
  obs_t x_t; state_t pre_count, row_addr;
  heap_entry_t row_data [LANES];
  heap_entry_t out_entry;
  mem_req_t req; mem_rsp_t rsp;
  int nr, nw, ns;
  int a_v [K][K]; int b_v [K][M];
  heap_entry_t pre [B];

  findmax #(.K(K), .M(M), .B(B)) dut (.clk, .rst_n, .start, .mid_capture, .x_t, .pre_count,
    .row_addr, .row_data, .mem_req(req), .mem_ready(rdy), .mem_rsp(rsp),
    .out_valid, .out_entry, .out_ready, .done, .busy);
  ddr_model #(.WORDS(WORDS), .LAT(4), .STALL_PCT(25)) mem (.clk, .rst_n, .req, .ready(rdy), .rsp,
    .n_reads(nr), .n_writes(nw), .n_stalls(ns));

  always_comb
    for (int l = 0; l < LANES; l++)
      row_data[l] = (int'(row_addr) * LANES + l < B) ? pre[int'(row_addr) * LANES + l] : '0;

  function automatic int add(int a, int b);
    return (a == NINF || b == NINF) ? NINF : a + b;
  endfunction

  task automatic run(int cnt, bit cap, int x);
    int j; bit fin;
    // random distinct states in heap_pre
    for (int e = 0; e < B; e++) begin
      pre[e].state = state_t'((e * 5 + 3) % K);
      pre[e].prob  = score_t'(-int'($urandom % 300));
      pre[e].mid   = state_t'($urandom % K);
    end
    @(negedge clk); pre_count = state_t'(cnt); mid_capture = cap; x_t = obs_t'(x); start = 1;
    @(negedge clk); start = 0;
    j = 0; fin = 0;
    while (!fin) begin
      out_ready = ($urandom % 3) != 0;
      @(posedge clk);
      if (done) fin = 1;
      if (out_valid && out_ready) begin
        int bs, bst, bmid, ep, em;
        bs = 0; bst = 0; bmid = 0;
        for (int e = 0; e < cnt; e++) begin
          int s;
          s = add(int'(pre[e].prob), a_v[pre[e].state][j]);
          if (e == 0 || s > bs || (s == bs && int'(pre[e].state) < bst)) begin
            bs = s; bst = int'(pre[e].state); bmid = int'(pre[e].mid);
          end
        end
        ep = add(bs, b_v[j][x]);
        em = cap ? bst : bmid;
        checks++;
        if (int'(out_entry.state) != j || int'(out_entry.prob) != ep || int'(out_entry.mid) != em) begin
          failures++;
          $display("cnt=%0d cap=%0d j=%0d: got (%0d,%0d,%0d) expected (%0d,%0d,%0d)", cnt, cap, j,
                   out_entry.state, out_entry.prob, out_entry.mid, j, ep, em);
        end
        j++;
      end
      @(negedge clk);
    end
    checks++; if (j != K) begin failures++; $display("%0d results, expected %0d", j, K); end
  endtask

  initial begin
    start = 0; out_ready = 0; mid_capture = 0; x_t = '0; pre_count = '0;
    for (int i = 0; i < K; i++) begin
      for (int j = 0; j < K; j++) a_v[i][j] = (($urandom % 4) == 0) ? NINF : -int'($urandom % 300);
      for (int o = 0; o < M; o++) b_v[i][o] = -int'($urandom % 300);
      for (int j = 0; j < K; j++) mem.mem[int'(a_base(K)) + i*K + j] = data_t'(a_v[i][j]);
      for (int o = 0; o < M; o++) mem.mem[int'(b_base(K)) + i*M + o] = data_t'(b_v[i][o]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    run(12, 1, 2); run(12, 0, 4); run(8, 0, 0); run(3, 1, 1); run(1, 0, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
