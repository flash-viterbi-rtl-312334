// tb_ob_cache: fills the observation cache with segments of different
// start and length from a stalling DDR model and reads every offset back,
// comparing with the observation sequence stored in memory.
module tb_ob_cache;
  import flash_pkg::*;
  localparam int K = 4, M = 5, T_MAX = 40;
  localparam int WORDS = int'(mem_words(K, M, T_MAX));
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic fill_start, fill_done, busy, rdy;
  time_t fill_m, fill_len, rd_off;
  obs_t rd_obs;
  mem_req_t req; mem_rsp_t rsp;
  int nr, nw, ns;
  int xs [T_MAX];

  ob_cache #(.K(K), .M(M), .T_MAX(T_MAX)) dut (.clk, .rst_n, .fill_start, .fill_m, .fill_len,
    .fill_done, .busy, .mem_req(req), .mem_ready(rdy), .mem_rsp(rsp), .rd_off, .rd_obs);
  ddr_model #(.WORDS(WORDS), .LAT(3), .STALL_PCT(30)) mem (.clk, .rst_n, .req, .ready(rdy), .rsp,
    .n_reads(nr), .n_writes(nw), .n_stalls(ns));

  task automatic seg(int m, int len);
    @(negedge clk); fill_m = time_t'(m); fill_len = time_t'(len); fill_start = 1;
    @(negedge clk); fill_start = 0;
    while (!fill_done) @(posedge clk);
    @(negedge clk);
    for (int i = 0; i < len; i++) begin
      rd_off = time_t'(i);
      #1;
      checks++;
      if (int'(rd_obs) != xs[m + i]) begin
        failures++; $display("seg (%0d,%0d) off %0d: %0d expected %0d", m, len, i, rd_obs, xs[m+i]);
      end
    end
  endtask

  initial begin
    fill_start = 0; fill_m = '0; fill_len = '0; rd_off = '0;
    for (int t = 0; t < T_MAX; t++) begin
      xs[t] = int'($urandom % M);
      mem.mem[int'(obs_base(K, M)) + t] = data_t'(xs[t]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    seg(0, 40); seg(5, 3); seg(17, 9); seg(39, 1); seg(8, 16);
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
