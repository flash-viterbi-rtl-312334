// initialize: initial path scores of a subtask (Init_datavalue).
//
// For a subtask starting at timestep m this unit produces one candidate for
// every state j = 0..K-1:
//   m == 0 : OptProb[j] = log pi[j]          + log B[j][x_m]
//   m  > 0 : OptProb[j] = log A[q*_{m-1}][j] + log B[j][x_m]
// The second line is the paper's pruned initialisation: only transitions
// leaving the already decoded optimal state q*_{m-1} are kept and its own
// accumulated score is taken as log 1 = 0, which removes the dependency on
// the previous subtask. Both cases share this one unit, as the paper
// intends. MidState of an initial candidate is 0; it is overwritten at the
// division point.
//
// Per state one DDR request fetches the pi/A word on lane 0 and the B word
// on lane 1. Requests are issued one per cycle while space is reserved in
// the result FIFO, so DDR latency is hidden; results leave in state order
// on a valid/ready stream. done pulses when the last candidate has been
// accepted downstream.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module initialize
  import flash_pkg::*;
#(
  parameter int K       = 512,
  parameter int M       = 50,
  parameter int OUT_DEP = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  time_t       m,
  input  state_t      q_prev,
  input  obs_t        x_m,
  output mem_req_t    mem_req,
  input  logic        mem_ready,
  input  mem_rsp_t    mem_rsp,
  output logic        out_valid,
  output heap_entry_t out_entry,
  input  logic        out_ready,
  output logic        done,
  output logic        busy
);
  state_t j_req, j_rsp, j_out;
  logic   base_case, active;
  state_t q_r;
  obs_t   x_r;
  logic   [$clog2(OUT_DEP+1)-1:0] inflight, fcnt;
  logic   issue, f_empty, f_full;
  heap_entry_t f_in;

  assign busy = active;

  always_comb begin
    mem_req = '0;
    mem_req.valid   = active && (32'(j_req) < K) && (32'(inflight) + 32'(fcnt) < OUT_DEP);
    mem_req.lane_en = LANES'(2'b11);
    mem_req.addr[0] = base_case ? pi_base() + addr_t'(j_req)
                                : a_base(K) + addr_t'(q_r) * addr_t'(K) + addr_t'(j_req);
    mem_req.addr[1] = b_base(K) + addr_t'(j_req) * addr_t'(M) + addr_t'(x_r);
  end
  assign issue = mem_req.valid && mem_ready;

  always_comb begin
    f_in.state = j_rsp;
    f_in.prob  = sat_add(score_t'(mem_rsp.data[0]), score_t'(mem_rsp.data[1]));
    f_in.mid   = '0;
  end

  sync_fifo #(.WIDTH($bits(heap_entry_t)), .DEPTH(OUT_DEP)) u_out (
    .clk, .rst_n, .clear(start),
    .push(mem_rsp.valid), .wr_data(f_in),
    .pop(out_valid && out_ready), .rd_data(out_entry),
    .empty(f_empty), .full(f_full), .count(fcnt));

  assign out_valid = !f_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j_req <= '0; j_rsp <= '0; j_out <= '0;
      active <= 1'b0; base_case <= 1'b0; q_r <= '0; x_r <= '0;
      inflight <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        j_req <= '0; j_rsp <= '0; j_out <= '0;
        active <= 1'b1;
        base_case <= (m == 0);
        q_r <= q_prev;
        x_r <= x_m;
        inflight <= '0;
      end else begin
        if (issue) j_req <= j_req + 1'b1;
        if (mem_rsp.valid) j_rsp <= j_rsp + 1'b1;
        inflight <= inflight + $bits(inflight)'(issue) - $bits(inflight)'(mem_rsp.valid);
        if (out_valid && out_ready) begin
          j_out <= j_out + 1'b1;
          if (32'(j_out) == K - 1) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
        end
      end
    end
  end
endmodule
