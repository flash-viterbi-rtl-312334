// tb_task_queue: checks the subtask generator against a breadth-first
// bisection computed in the testbench: same tasks in the same order, T-1
// tasks in all, all_done at the end, occupancy within the queue depth.
// The consumer's ready is random so tasks are also held back.
module tb_task_queue;
  import flash_pkg::*;
  localparam int T_MAX = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  start, out_valid, out_ready, all_done;
  time_t seq_len;
  task_t out_task;
  logic [$clog2(T_MAX/2+3)-1:0] occ;

  task_queue #(.T_MAX(T_MAX)) dut (.clk, .rst_n, .start, .seq_len, .out_valid, .out_task,
    .out_ready, .all_done, .occupancy(occ));

  task automatic run(int T);
    int em[$], en[$], qm[$], qn[$];
    int got, maxocc;
    qm.push_back(0); qn.push_back(T - 1);
    while (qm.size() > 0) begin
      int m, n, h;
      m = qm.pop_front(); n = qn.pop_front(); h = (m + n) / 2;
      em.push_back(m); en.push_back(n);
      if (n - m > 2) begin qm.push_back(m); qn.push_back(h); qm.push_back(h+1); qn.push_back(n); end
      else if (n - m == 2) begin qm.push_back(m); qn.push_back(h); end
    end
    @(negedge clk); seq_len = time_t'(T); start = 1;
    @(negedge clk); start = 0;
    got = 0; maxocc = 0;
    while (!all_done) begin
      out_ready = ($urandom % 3) != 0;
      if (int'(occ) > maxocc) maxocc = int'(occ);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (got >= em.size() || int'(out_task.m) != em[got] || int'(out_task.n) != en[got]) begin
          failures++;
          $display("T=%0d task %0d: got (%0d,%0d)", T, got, out_task.m, out_task.n);
        end
        got++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    checks++; if (got != T - 1) begin failures++; $display("T=%0d: %0d tasks, expected %0d", T, got, T-1); end
    checks++; if (maxocc > T_MAX / 2 + 2) begin failures++; $display("occupancy %0d", maxocc); end
  endtask

  initial begin
    start = 0; out_ready = 0; seq_len = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(16); run(64); run(37); run(2); run(3); run(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
