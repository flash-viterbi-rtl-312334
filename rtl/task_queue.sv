// task_queue: FIFO-based generator of divide-and-conquer subtasks.
//
// A subtask (m,n) decodes the segment of timesteps m..n and recovers the
// optimal state at its division point tmid = floor((m+n)/2). On start the
// queue holds the root task (0, T-1). Whenever a task is dequeued its
// children are generated and appended at once, following the
// non-recursive rule of the paper:
//   n-m  > 2 : (m, tmid) and (tmid+1, n)
//   n-m == 2 : (m, tmid) only (the right half is a single known step)
//   n-m  < 2 : no children
// Because the queue is first-in first-out, tasks leave in layer order and,
// inside a layer, by increasing start time: parents always precede their
// children, which is the ordering the decoding needs. Children may be
// generated at dequeue time because they depend only on (m,n), not on the
// decoding result; they are decoded only after their parent, since the
// controller takes one task at a time.
//
// This block serves the serial configuration (parallelism degree P = 1) of
// the single decoding unit; the P-way first split that the paper describes
// for multi-threaded software is not generated here.
//
// Interface: start (one cycle) with seq_len = T >= 2; out_valid/out_ready
// handshake on out_task; all_done is high when the queue is empty after a
// start. Timing: one task per cycle, children visible the cycle after the
// pop.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module task_queue
  import flash_pkg::*;
#(
  parameter int T_MAX = 512,             // longest sequence supported
  parameter int DEPTH = T_MAX / 2 + 2    // enough for the widest layer
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  time_t seq_len,
  output logic  out_valid,
  output task_t out_task,
  input  logic  out_ready,
  output logic  all_done,
  output logic [$clog2(DEPTH+1)-1:0] occupancy
);
  localparam int PW = $clog2(DEPTH);

  task_t          q [DEPTH];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic           active;

  function automatic logic [PW-1:0] adv(logic [PW-1:0] p, int k);
    int unsigned s;
    s = int'(p) + k;
    if (s >= DEPTH) s = s - DEPTH;
    return PW'(s);
  endfunction

  task_t head, child_l, child_r;
  logic  pop, push_l, push_r;
  time_t tmid, span;

  assign head      = q[rd_ptr];
  assign out_valid = active && (cnt != 0);
  assign out_task  = head;
  assign pop       = out_valid && out_ready;
  assign all_done  = active && (cnt == 0);
  assign occupancy = cnt;

  always_comb begin
    span    = head.n - head.m;
    tmid    = time_t'((32'(head.m) + 32'(head.n)) >> 1);
    child_l = '{m: head.m,    n: tmid};
    child_r = '{m: tmid + 1'b1, n: head.n};
    push_l  = pop && (span >= 2);
    push_r  = pop && (span > 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
      active <= 1'b0;
    end else if (start) begin
      q[0]   <= '{m: '0, n: seq_len - 1'b1};
      rd_ptr <= '0;
      wr_ptr <= PW'(1);
      cnt    <= 1;
      active <= 1'b1;
    end else begin
      if (push_l) q[wr_ptr] <= child_l;
      if (push_r) q[adv(wr_ptr, 1)] <= child_r;
      wr_ptr <= adv(wr_ptr, (push_l ? 1 : 0) + (push_r ? 1 : 0));
      if (pop) rd_ptr <= adv(rd_ptr, 1);
      cnt <= cnt + $bits(cnt)'(push_l) + $bits(cnt)'(push_r) - $bits(cnt)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    pop |-> (32'(cnt) + 1 <= DEPTH));
  a_seq_len: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (seq_len >= 2 && 32'(seq_len) <= T_MAX));
endmodule
