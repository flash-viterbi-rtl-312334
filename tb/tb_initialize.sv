// tb_initialize: checks the initial candidates of a subtask in both cases,
// base (m = 0: log pi + log B) and pruned (m > 0: log A from the decoded
// state q*_{m-1} + log B), including -infinity transitions, with a
// stalling DDR model and a consumer that is not always ready.
module tb_initialize;
  import flash_pkg::*;
  localparam int K = 20, M = 7, T_MAX = 8;
  localparam int WORDS = int'(mem_words(K, M, T_MAX));
  localparam int NINF = int'(NEG_INF);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, out_valid, out_ready, done, busy, rdy;
  time_t m; state_t q_prev; obs_t x_m;
  heap_entry_t out_entry;
  mem_req_t req; mem_rsp_t rsp;
  int nr, nw, ns;
  int pi_v [K]; int a_v [K][K]; int b_v [K][M];

  initialize #(.K(K), .M(M)) dut (.clk, .rst_n, .start, .m, .q_prev, .x_m,
    .mem_req(req), .mem_ready(rdy), .mem_rsp(rsp), .out_valid, .out_entry, .out_ready, .done, .busy);
  ddr_model #(.WORDS(WORDS), .LAT(4), .STALL_PCT(25)) mem (.clk, .rst_n, .req, .ready(rdy), .rsp,
    .n_reads(nr), .n_writes(nw), .n_stalls(ns));

  function automatic int add(int a, int b);
    return (a == NINF || b == NINF) ? NINF : a + b;
  endfunction

  task automatic run(int mm, int q, int x);
    int j; bit fin;
    @(negedge clk); m = time_t'(mm); q_prev = state_t'(q); x_m = obs_t'(x); start = 1;
    @(negedge clk); start = 0;
    j = 0; fin = 0;
    while (!fin) begin
      out_ready = ($urandom % 4) != 0;
      @(posedge clk);
      if (done) fin = 1;
      if (out_valid && out_ready) begin
        int e;
        e = add((mm == 0) ? pi_v[j] : a_v[q][j], b_v[j][x]);
        checks++;
        if (int'(out_entry.state) != j || int'(out_entry.prob) != e) begin
          failures++; $display("m=%0d j=%0d: got state %0d prob %0d, expected %0d", mm, j, out_entry.state, out_entry.prob, e);
        end
        j++;
      end
      @(negedge clk);
    end
    checks++; if (j != K) begin failures++; $display("%0d candidates, expected %0d", j, K); end
  endtask

  initial begin
    start = 0; out_ready = 0; m = '0; q_prev = '0; x_m = '0;
    for (int i = 0; i < K; i++) begin
      pi_v[i] = -int'($urandom % 500);
      for (int j = 0; j < K; j++) a_v[i][j] = (($urandom % 3) == 0) ? NINF : -int'($urandom % 500);
      for (int o = 0; o < M; o++) b_v[i][o] = -int'($urandom % 500);
      mem.mem[int'(pi_base()) + i] = data_t'(pi_v[i]);
      for (int j = 0; j < K; j++) mem.mem[int'(a_base(K)) + i*K + j] = data_t'(a_v[i][j]);
      for (int o = 0; o < M; o++) mem.mem[int'(b_base(K)) + i*M + o] = data_t'(b_v[i][o]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    run(0, 0, 3); run(5, 7, 1); run(2, 19, 6); run(0, 4, 0);
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
