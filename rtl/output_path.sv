// output_path: backtracking and decoded-sequence buffer (OUTPUT_PATH).
//
// After the last timestep n of a subtask (m,n), heap_pre holds the final
// candidates, each carrying the state it passed through at the division
// point tmid. Backtracking scans heap_pre one row of LANES entries per
// cycle:
//   root task (0,T-1) : q*_{T-1} = best candidate's State,
//                       q*_tmid  = that candidate's MidState;
//   other tasks       : q*_n is already known; the candidate whose State
//                       equals q*_n is searched and q*_tmid = its MidState.
// With a beam narrower than K the known state may have left the beam; the
// unit then takes the best candidate's MidState and pulses bt_miss (the
// paper does not say what happens in that case; this is the design's own
// choice, and the decoded path may then be sub-optimal).
//
// The recovered states are kept in a T_MAX-entry path buffer. Two
// asynchronous lookup ports give the controller q*_{m-1} (pruned
// initialisation) and q*_n. On wb_start the buffer is written to DDR at
// OUT_BASE, one word per cycle (Decoded_sequence); wb_done pulses when the
// last write has been accepted. Backtracking takes ceil(count/LANES)+1
// cycles.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module output_path
  import flash_pkg::*;
#(
  parameter int K     = 512,
  parameter int M     = 50,
  parameter int T_MAX = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // backtracking
  input  logic        bt_start,
  input  logic        bt_root,
  input  time_t       bt_n,
  input  time_t       bt_tmid,
  input  state_t      pre_count,
  output state_t      row_addr,
  input  heap_entry_t row_data [LANES],
  output logic        bt_done,
  output logic        bt_miss,
  // path lookups
  input  time_t       lk0_t,
  output state_t      lk0_q,
  input  time_t       lk1_t,
  output state_t      lk1_q,
  // write-back of the decoded sequence
  input  logic        wb_start,
  input  time_t       seq_len,
  output mem_req_t    mem_req,
  input  logic        mem_ready,
  output logic        wb_done
);
  state_t path [T_MAX];

  logic        scanning, root_r, found, best_v;
  time_t       n_r, tmid_r;
  state_t      r_cnt, n_rows, cnt_r, target;
  heap_entry_t best, match;
  logic        wb_act;
  time_t       wb_t, wb_len;

  assign lk0_q    = path[lk0_t];
  assign lk1_q    = path[lk1_t];
  assign row_addr = r_cnt;

  // best and match of this row merged with the running ones
  heap_entry_t nbest, nmatch;
  logic        nbest_v, nfound;
  always_comb begin
    nbest = best; nbest_v = best_v; nmatch = match; nfound = found;
    for (int l = 0; l < LANES; l++) begin
      if (32'(r_cnt) * LANES + l < 32'(cnt_r)) begin
        if (!nbest_v || entry_better(row_data[l], nbest)) begin
          nbest = row_data[l];
          nbest_v = 1'b1;
        end
        if (row_data[l].state == target) begin
          nmatch = row_data[l];
          nfound = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scanning <= 1'b0; root_r <= 1'b0; found <= 1'b0; best_v <= 1'b0;
      n_r <= '0; tmid_r <= '0; r_cnt <= '0; n_rows <= '0; cnt_r <= '0; target <= '0;
      best <= '0; match <= '0; bt_done <= 1'b0; bt_miss <= 1'b0;
    end else begin
      bt_done <= 1'b0;
      bt_miss <= 1'b0;
      if (bt_start) begin
        scanning <= 1'b1;
        root_r <= bt_root;
        n_r <= bt_n;
        tmid_r <= bt_tmid;
        target <= path[bt_n];
        r_cnt <= '0;
        cnt_r <= pre_count;
        n_rows <= state_t'((32'(pre_count) + LANES - 1) / LANES);
        found <= 1'b0;
        best_v <= 1'b0;
      end else if (scanning) begin
        best <= nbest; best_v <= nbest_v; match <= nmatch; found <= nfound;
        r_cnt <= r_cnt + 1'b1;
        if (r_cnt == n_rows - 1'b1) begin
          scanning <= 1'b0;
          bt_done  <= 1'b1;
          if (!root_r && !nfound) bt_miss <= 1'b1;
        end
      end
    end
  end

  // path buffer writes: at the end of a scan
  always_ff @(posedge clk) begin
    if (scanning && r_cnt == n_rows - 1'b1) begin
      if (root_r) begin
        path[n_r]    <= nbest.state;
        path[tmid_r] <= nbest.mid;
      end else begin
        path[tmid_r] <= nfound ? nmatch.mid : nbest.mid;
      end
    end
  end

  // write-back
  always_comb begin
    mem_req = '0;
    mem_req.valid   = wb_act;
    mem_req.we      = 1'b1;
    mem_req.lane_en = LANES'(1);
    mem_req.addr[0] = out_base(K, M, T_MAX) + addr_t'(wb_t);
    mem_req.wdata   = data_t'(path[wb_t]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_act <= 1'b0; wb_t <= '0; wb_len <= '0; wb_done <= 1'b0;
    end else begin
      wb_done <= 1'b0;
      if (wb_start) begin
        wb_act <= 1'b1;
        wb_t   <= '0;
        wb_len <= seq_len;
      end else if (wb_act && mem_ready) begin
        wb_t <= wb_t + 1'b1;
        if (wb_t == wb_len - 1'b1) begin
          wb_act  <= 1'b0;
          wb_done <= 1'b1;
        end
      end
    end
  end

  a_pre_nonempty: assert property (@(posedge clk) disable iff (!rst_n) bt_start |-> pre_count != 0);
endmodule
