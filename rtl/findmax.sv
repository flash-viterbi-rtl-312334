// findmax: one dynamic-programming timestep of FLASH-BS Viterbi.
//
// For every current state j = 0..K-1 it evaluates the transitions from the
// candidates of the previous timestep held in heap_pre (Pre_datavalue):
//   best      = argmax over e in heap_pre of  e.OptProb + log A[e.State][j]
//   OptProb   = best score + log B[j][x_t]
//   MidState  = best.State   if t == tmid+1  (first step after the division)
//             = best.MidState otherwise
// and emits the candidate (j, OptProb, MidState) as Max_datavalue. Carrying
// MidState inside each candidate replaces the paper's two-array update
// MidState[i] <- MidState[PreState[i]]; PreState itself need not be stored.
// Equal scores are resolved towards the smaller predecessor index.
//
// Data parallelism and pipelining: heap_pre is read LANES entries at a time
// and the LANES transition words A[e.State][j] are fetched from DDR in one
// gather request, then reduced together. Each state first issues one
// request for its emission word, then ceil(count/LANES) transition
// requests. Requests issue back to back while results are still in flight,
// so DDR latency overlaps with the reductions; a tag FIFO keeps the heap
// entries of every request until its data returns. Result FIFO space is
// reserved before a state's requests start, since DDR data cannot be
// stalled. Throughput is 1 + ceil(count/LANES) cycles per state when DDR
// accepts a request every cycle.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module findmax
  import flash_pkg::*;
#(
  parameter int K       = 512,
  parameter int M       = 50,
  parameter int B       = 512,
  parameter int TAG_DEP = 8,
  parameter int OUT_DEP = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        mid_capture,   // t == tmid + 1
  input  obs_t        x_t,
  input  state_t      pre_count,     // entries held in heap_pre
  // row read port of heap_pre (asynchronous)
  output state_t      row_addr,
  input  heap_entry_t row_data [LANES],
  // DDR client port
  output mem_req_t    mem_req,
  input  logic        mem_ready,
  input  mem_rsp_t    mem_rsp,
  // Max_datavalue stream
  output logic        out_valid,
  output heap_entry_t out_entry,
  input  logic        out_ready,
  output logic        done,
  output logic        busy
);
  typedef struct packed {
    logic                         is_b;
    logic                         last;
    logic [LANES-1:0]             lane_en;
    heap_entry_t [LANES-1:0]      ent;
  } tag_t;

  state_t n_rows, count_r;
  state_t j_req, r_req, j_rsp, j_out;
  logic   b_phase;           // next request of j_req is its emission word
  logic   active, cap_r;
  obs_t   x_r;
  logic   [$clog2(OUT_DEP+1)-1:0] j_infl, fcnt;
  logic   [$clog2(TAG_DEP+1)-1:0] tcnt;
  logic   t_empty, t_full, f_empty, f_full;
  tag_t   tag_in, tag_head;
  logic   issue, credit_ok;

  assign busy     = active;
  assign row_addr = r_req;

  // ---------------- request side ----------------
  assign credit_ok = !b_phase || (32'(j_infl) + 32'(fcnt) < OUT_DEP);

  always_comb begin
    mem_req = '0;
    tag_in  = '0;
    mem_req.valid = active && (32'(j_req) < K) && !t_full && credit_ok;
    if (b_phase) begin
      mem_req.lane_en = LANES'(1);
      mem_req.addr[0] = b_base(K) + addr_t'(j_req) * addr_t'(M) + addr_t'(x_r);
      tag_in.is_b     = 1'b1;
    end else begin
      for (int l = 0; l < LANES; l++) begin
        mem_req.lane_en[l] = (32'(r_req) * LANES + l < 32'(count_r));
        mem_req.addr[l]    = a_base(K) + addr_t'(row_data[l].state) * addr_t'(K) + addr_t'(j_req);
        tag_in.ent[l]      = row_data[l];
      end
      tag_in.lane_en = mem_req.lane_en;
      tag_in.last    = (r_req == n_rows - 1'b1);
    end
  end
  assign issue = mem_req.valid && mem_ready;

  sync_fifo #(.WIDTH($bits(tag_t)), .DEPTH(TAG_DEP)) u_tag (
    .clk, .rst_n, .clear(start),
    .push(issue), .wr_data(tag_in),
    .pop(mem_rsp.valid), .rd_data(tag_head),
    .empty(t_empty), .full(t_full), .count(tcnt));

  // ---------------- reduction side ----------------
  score_t      acc_b, acc_score;
  heap_entry_t acc_ent;
  logic        acc_valid;
  score_t      row_score, new_score;
  heap_entry_t row_ent, new_ent;
  logic        row_valid, push_res;
  heap_entry_t res;

  always_comb begin
    row_valid = 1'b0;
    row_score = NEG_INF;
    row_ent   = '0;
    for (int l = 0; l < LANES; l++) begin
      score_t c;
      c = sat_add(tag_head.ent[l].prob, score_t'(mem_rsp.data[l]));
      if (tag_head.lane_en[l] &&
          (!row_valid || better(c, tag_head.ent[l].state, row_score, row_ent.state))) begin
        row_valid = 1'b1;
        row_score = c;
        row_ent   = tag_head.ent[l];
      end
    end
    if (acc_valid && (!row_valid || !better(row_score, row_ent.state, acc_score, acc_ent.state))) begin
      new_score = acc_score;
      new_ent   = acc_ent;
    end else begin
      new_score = row_score;
      new_ent   = row_ent;
    end
    res.state = j_rsp;
    res.prob  = sat_add(new_score, acc_b);
    res.mid   = cap_r ? new_ent.state : new_ent.mid;
    push_res  = mem_rsp.valid && !tag_head.is_b && tag_head.last;
  end

  sync_fifo #(.WIDTH($bits(heap_entry_t)), .DEPTH(OUT_DEP)) u_out (
    .clk, .rst_n, .clear(start),
    .push(push_res), .wr_data(res),
    .pop(out_valid && out_ready), .rd_data(out_entry),
    .empty(f_empty), .full(f_full), .count(fcnt));
  assign out_valid = !f_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_rows <= '0; count_r <= '0; j_req <= '0; r_req <= '0; j_rsp <= '0; j_out <= '0;
      b_phase <= 1'b1; active <= 1'b0; cap_r <= 1'b0; x_r <= '0; j_infl <= '0;
      acc_b <= '0; acc_score <= '0; acc_ent <= '0; acc_valid <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        count_r <= pre_count;
        n_rows  <= state_t'((32'(pre_count) + LANES - 1) / LANES);
        j_req <= '0; r_req <= '0; j_rsp <= '0; j_out <= '0;
        b_phase <= 1'b1; active <= 1'b1; cap_r <= mid_capture; x_r <= x_t;
        j_infl <= '0; acc_valid <= 1'b0;
      end else begin
        if (issue) begin
          if (b_phase) begin
            b_phase <= 1'b0;
            r_req   <= '0;
          end else if (r_req == n_rows - 1'b1) begin
            b_phase <= 1'b1;
            j_req   <= j_req + 1'b1;
          end else begin
            r_req <= r_req + 1'b1;
          end
        end
        j_infl <= j_infl + $bits(j_infl)'((issue && b_phase)) - $bits(j_infl)'(push_res);
        if (mem_rsp.valid) begin
          if (tag_head.is_b) begin
            acc_b     <= score_t'(mem_rsp.data[0]);
            acc_valid <= 1'b0;
          end else if (tag_head.last) begin
            acc_valid <= 1'b0;
            j_rsp     <= j_rsp + 1'b1;
          end else begin
            acc_valid <= 1'b1;
            acc_score <= new_score;
            acc_ent   <= new_ent;
          end
        end
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

  a_rsp_has_tag: assert property (@(posedge clk) disable iff (!rst_n) mem_rsp.valid |-> !t_empty);
  a_count: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (pre_count != 0 && 32'(pre_count) <= B));
endmodule
