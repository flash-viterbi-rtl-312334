// heap_operation: top-B maintenance of heap_total (HEAP_OPERATION).
//
// Every candidate of the current timestep (Cur_datavalue) arrives on a
// valid/ready stream and is handled by the paper's three rules:
//   1. fewer than B-1 entries stored : append it, no ordering work;
//   2. exactly B-1 entries stored    : append it, then heapify the whole
//                                      array bottom-up into a min-heap;
//   3. B entries stored              : compare it with the root (the worst
//                                      kept candidate); if it is better it
//                                      replaces the root, which is then
//                                      sifted down, otherwise it is dropped.
// "Better" is the higher OptProb, equal scores going to the smaller state
// index, so the kept set is exactly the B best candidates. clear empties
// heap_total at the start of a timestep.
//
// Timing: rules 1 and the rejection in rule 3 take one cycle; a sift-down
// takes one cycle per heap level (both children are read in the same
// cycle); heapify takes one load cycle plus a sift-down for each of the
// B/2 internal nodes. in_ready is high only when the unit is idle. The ev_*
// outputs pulse once per rule application for monitoring.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module heap_operation
  import flash_pkg::*;
#(
  parameter int B = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  heap_entry_t in_entry,
  output logic        in_ready,
  // heap_total port
  output state_t      rd0_addr,
  input  heap_entry_t rd0_data,
  output state_t      rd1_addr,
  input  heap_entry_t rd1_data,
  output logic        we,
  output state_t      wr_addr,
  output heap_entry_t wr_data,
  output logic        cnt_we,
  output state_t      cnt_wdata,
  input  state_t      count,
  // status
  output logic        idle,
  output logic        ev_direct,
  output logic        ev_heapify,
  output logic        ev_replace,
  output logic        ev_reject
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SIFT} st_t;
  st_t st;

  int unsigned node;     // current sift position
  int unsigned hnode;    // heapify: internal node being processed
  logic        in_hfy;   // sift belongs to a heapify pass
  heap_entry_t cur;      // element being sifted

  int unsigned l_idx, r_idx, w_idx;
  logic        has_child;
  heap_entry_t w_ent;
  logic        accept;

  assign idle     = (st == S_IDLE);
  assign in_ready = (st == S_IDLE) && !clear;
  assign accept   = in_valid && in_ready;

  always_comb begin
    l_idx = 2 * node + 1;
    r_idx = 2 * node + 2;
    has_child = 1'b0;
    w_idx = l_idx;
    w_ent = rd0_data;
    rd0_addr = '0;
    rd1_addr = '0;
    we = 1'b0;
    wr_addr = '0;
    wr_data = in_entry;
    cnt_we = 1'b0;
    cnt_wdata = count + 1'b1;
    ev_direct = 1'b0; ev_heapify = 1'b0; ev_replace = 1'b0; ev_reject = 1'b0;
    unique case (st)
      S_IDLE: begin
        rd0_addr = '0;                       // root, for rule 3
        if (clear) begin
          cnt_we = 1'b1;
          cnt_wdata = '0;
        end else if (accept) begin
          if (32'(count) < B) begin          // rules 1 and 2
            we = 1'b1;
            wr_addr = count;
            cnt_we = 1'b1;
            if (32'(count) == B - 1) ev_heapify = 1'b1;
            else                     ev_direct  = 1'b1;
          end else if (entry_better(in_entry, rd0_data)) begin
            ev_replace = 1'b1;               // rule 3, kept
          end else begin
            ev_reject = 1'b1;                // rule 3, dropped
          end
        end
      end
      S_LOAD: begin
        rd0_addr = state_t'(hnode);
      end
      S_SIFT: begin
        rd0_addr = state_t'(l_idx);
        rd1_addr = state_t'(r_idx);
        if (l_idx < 32'(count)) begin
          has_child = 1'b1;
          // the worse of the two children would move up
          if (r_idx < 32'(count) && entry_better(rd0_data, rd1_data)) begin
            w_idx = r_idx;
            w_ent = rd1_data;
          end
        end
        we = 1'b1;
        wr_addr = state_t'(node);
        if (has_child && entry_better(cur, w_ent)) wr_data = w_ent;
        else                                        wr_data = cur;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; node <= 0; hnode <= 0; in_hfy <= 1'b0; cur <= '0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (accept) begin
            if (32'(count) == B - 1 && B > 1) begin
              hnode  <= B / 2 - 1;
              in_hfy <= 1'b1;
              st     <= S_LOAD;
            end else if (32'(count) == B && entry_better(in_entry, rd0_data)) begin
              cur    <= in_entry;
              node   <= 0;
              in_hfy <= 1'b0;
              st     <= S_SIFT;
            end
          end
        end
        S_LOAD: begin
          cur  <= rd0_data;
          node <= hnode;
          st   <= S_SIFT;
        end
        S_SIFT: begin
          if (has_child && entry_better(cur, w_ent)) begin
            node <= w_idx;
          end else if (in_hfy && hnode != 0) begin
            hnode <= hnode - 1;
            st    <= S_LOAD;
          end else begin
            in_hfy <= 1'b0;
            st     <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_count_range: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= B);
endmodule
