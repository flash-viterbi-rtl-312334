// tb_flash_bs_full: one complete decode with the accelerator at its
// default size (K = 512 states, |O| = 50 symbols, beam B = K = 512,
// T = 512 timesteps), i.e. the evaluation's default HMM setting with an
// Erdos-Renyi transition graph of edge probability about 0.25.
//
// The decoded path must be a valid state sequence whose log-likelihood
// equals the optimum computed by a plain full-table Viterbi in the
// testbench (with B = K the beam keeps every state, so the result must be
// exact). The cycle count is printed. Run time is a few minutes.
module tb_flash_bs_full;
  import flash_pkg::*;

  localparam int K = 512, M = 50, T_MAX = 512, T = 512;
  localparam int WORDS = int'(mem_words(K, M, T_MAX));
  localparam int NINF = int'(NEG_INF);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     start, busy, done, rdy;
  time_t    seq_len;
  mem_req_t req;
  mem_rsp_t rsp;
  int       nr, nw, ns;

  flash_bs_top dut (
    .clk, .rst_n, .start, .seq_len, .busy, .done,
    .ddr_req(req), .ddr_ready(rdy), .ddr_rsp(rsp));
  ddr_model #(.WORDS(WORDS), .LAT(8), .STALL_PCT(0)) mem (
    .clk, .rst_n, .req, .ready(rdy), .rsp, .n_reads(nr), .n_writes(nw), .n_stalls(ns));

  int pi_v [K];
  int a_v  [K][K];
  int b_v  [K][M];
  int x_v  [T];

  function automatic int add(int a, int b);
    if (a == NINF || b == NINF) return NINF;
    return a + b;
  endfunction

  int d [K];
  int nd [K];
  int got [T];

  initial begin
    int opt, sc, cyc;
    start = 0;
    seq_len = '0;
    for (int i = 0; i < K; i++) begin
      pi_v[i] = -int'($urandom % 1000) - 1;
      for (int j = 0; j < K; j++)
        a_v[i][j] = (j == (i + 1) % K || ($urandom % 1000) < 253) ? -int'($urandom % 1000) - 1 : NINF;
      for (int o = 0; o < M; o++) b_v[i][o] = -int'($urandom % 1000) - 1;
    end
    for (int t = 0; t < T; t++) x_v[t] = int'($urandom % M);
    for (int i = 0; i < K; i++) begin
      mem.mem[int'(pi_base()) + i] = data_t'(pi_v[i]);
      for (int j = 0; j < K; j++) mem.mem[int'(a_base(K)) + i*K + j] = data_t'(a_v[i][j]);
      for (int o = 0; o < M; o++) mem.mem[int'(b_base(K)) + i*M + o] = data_t'(b_v[i][o]);
    end
    for (int t = 0; t < T; t++) begin
      mem.mem[int'(obs_base(K, M)) + t] = data_t'(x_v[t]);
      mem.mem[int'(out_base(K, M, T_MAX)) + t] = '1;
    end
    // optimum by plain Viterbi
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
    opt = NINF;
    for (int j = 0; j < K; j++) if (d[j] > opt) opt = d[j];

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    seq_len = time_t'(T);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin
      @(posedge clk);
      cyc++;
    end
    repeat (2) @(posedge clk);
    for (int t = 0; t < T; t++) begin
      got[t] = int'(mem.mem[int'(out_base(K, M, T_MAX)) + t]);
      checks++;
      if (got[t] < 0 || got[t] >= K) begin
        failures++;
        got[t] = 0;
      end
    end
    sc = add(pi_v[got[0]], b_v[got[0]][x_v[0]]);
    for (int t = 1; t < T; t++) sc = add(add(sc, a_v[got[t-1]][got[t]]), b_v[got[t]][x_v[t]]);
    checks++;
    if (sc != opt) begin
      failures++;
      $display("path score %0d, optimum %0d", sc, opt);
    end
    $display("K=%0d B=%0d T=%0d: %0d cycles, %0d DDR reads, optimum %0d, decoded %0d", K, K, T, cyc, nr, opt, sc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
