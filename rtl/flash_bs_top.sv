// flash_bs_top: FLASH-BS Viterbi decoding accelerator.
//
// Decodes the most likely hidden-state sequence q*_0..q*_{T-1} of an HMM
// (pi, A, B in the log domain) for an observation sequence x_0..x_{T-1},
// all held in DDR, using O(B) on-chip candidate storage independent of T.
// The sequence is split by bisection into subtasks (m,n); every subtask
// runs a beam-limited Viterbi pass over m..n that remembers, per surviving
// candidate, only the state it passed through at the midpoint tmid, and
// backtracking then recovers the single state q*_tmid. Children are pruned
// to start from the already decoded state q*_{m-1}, so every subtask is
// self-contained.
//
// Blocks (names as in the paper's architecture figure): TASK QUEUE hands
// out subtasks; OB_CACHE fetches x_m..x_n; INITIALIZE produces the t = m
// candidates; FINDMAX produces the candidates of each later timestep from
// heap_pre; a multiplexer picks Init_datavalue or Max_datavalue as
// Cur_datavalue; HEAP_OPERATION keeps the best B of them in heap_total;
// HEAP_SELECT swaps HEAP_1 and HEAP_2 between the heap_total and heap_pre
// roles each timestep; OUTPUT_PATH backtracks and finally writes the
// decoded sequence to DDR; DDR CONTROLLER shares the memory port. The
// sequencing FSM in this module (task fetch, observation fill,
// initialisation, timestep loop, backtracking, write-back) is this
// design's own; the paper gives the order of the phases but no controller.
//
// Interface: pulse start with seq_len = T (2..T_MAX) after the memory holds
// the HMM and observations (map in flash_pkg); busy is high while decoding;
// done pulses when the decoded sequence has been written to OUT_BASE. The
// DDR port is a LANES-wide gather read / single-word write request with
// valid/ready and an in-order, unstallable response.
//
// Cycle cost: per timestep about K * (1 + ceil(B/LANES)) cycles in FINDMAX
// plus heap maintenance; about T * log2(T) timesteps in all.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module flash_bs_top
  import flash_pkg::*;
#(
  parameter int K     = 512,   // hidden states (paper default)
  parameter int M     = 50,    // observation symbols |O| (paper default)
  parameter int B     = 512,   // beam width (paper default B = K)
  parameter int T_MAX = 512    // longest sequence (paper default T)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  time_t    seq_len,
  output logic     busy,
  output logic     done,
  output mem_req_t ddr_req,
  input  logic     ddr_ready,
  input  mem_rsp_t ddr_rsp
);
  typedef enum logic [3:0] {
    S_IDLE, S_POP, S_FILL, S_INIT0, S_INIT, S_DP0, S_DP, S_BT0, S_BT, S_WB
  } st_t;
  st_t st;

  time_t m_r, n_r, tmid_r, t_r, len_r;
  logic  phase_done;

  // ---------------- TASK QUEUE ----------------
  logic  tq_start, tq_valid, tq_ready, tq_all_done;
  task_t tq_task;
  task_queue #(.T_MAX(T_MAX)) u_task_queue (
    .clk, .rst_n, .start(tq_start), .seq_len(seq_len),
    .out_valid(tq_valid), .out_task(tq_task), .out_ready(tq_ready),
    .all_done(tq_all_done), .occupancy());

  // ---------------- DDR CONTROLLER ----------------
  mem_req_t cl_req   [4];
  logic     cl_ready [4];
  mem_rsp_t cl_rsp   [4];
  ddr_controller #(.N_CL(4)) u_ddr_controller (
    .clk, .rst_n, .cl_req, .cl_ready, .cl_rsp,
    .ddr_req, .ddr_ready, .ddr_rsp);

  // ---------------- OB_CACHE ----------------
  logic  obc_start, obc_done;
  time_t obc_off;
  obs_t  obc_obs;
  ob_cache #(.K(K), .M(M), .T_MAX(T_MAX)) u_ob_cache (
    .clk, .rst_n, .fill_start(obc_start), .fill_m(tq_task.m),
    .fill_len(tq_task.n - tq_task.m + 1'b1), .fill_done(obc_done), .busy(),
    .mem_req(cl_req[0]), .mem_ready(cl_ready[0]), .mem_rsp(cl_rsp[0]),
    .rd_off(obc_off), .rd_obs(obc_obs));

  // ---------------- OUTPUT_PATH (lookups used by INITIALIZE) ----------------
  state_t      q_prev;
  logic        bt_start, bt_done, wb_start, wb_done;
  state_t      op_row_addr, fm_row_addr, p_row_addr, p_count;
  heap_entry_t p_row_data [LANES];

  // ---------------- INITIALIZE ----------------
  logic        init_start, init_done, init_valid, init_ready;
  heap_entry_t init_entry;
  initialize #(.K(K), .M(M)) u_initialize (
    .clk, .rst_n, .start(init_start), .m(m_r), .q_prev(q_prev), .x_m(obc_obs),
    .mem_req(cl_req[1]), .mem_ready(cl_ready[1]), .mem_rsp(cl_rsp[1]),
    .out_valid(init_valid), .out_entry(init_entry), .out_ready(init_ready),
    .done(init_done), .busy());

  // ---------------- FINDMAX ----------------
  logic        fm_start, fm_done, fm_valid, fm_ready;
  heap_entry_t fm_entry;
  findmax #(.K(K), .M(M), .B(B)) u_findmax (
    .clk, .rst_n, .start(fm_start), .mid_capture(t_r == tmid_r + 1'b1),
    .x_t(obc_obs), .pre_count(p_count),
    .row_addr(fm_row_addr), .row_data(p_row_data),
    .mem_req(cl_req[2]), .mem_ready(cl_ready[2]), .mem_rsp(cl_rsp[2]),
    .out_valid(fm_valid), .out_entry(fm_entry), .out_ready(fm_ready),
    .done(fm_done), .busy());

  // ---------------- Cur_datavalue multiplexer ----------------
  logic        cur_valid, cur_ready, use_init;
  heap_entry_t cur_entry;
  assign use_init   = (st == S_INIT0) || (st == S_INIT);
  assign cur_valid  = use_init ? init_valid : fm_valid;
  assign cur_entry  = use_init ? init_entry : fm_entry;
  assign init_ready = use_init  && cur_ready;
  assign fm_ready   = !use_init && cur_ready;

  // ---------------- HEAP_OPERATION ----------------
  logic        hop_clear, hop_idle;
  state_t      t_rd0_addr, t_rd1_addr, t_wr_addr, t_cnt_wdata, t_count;
  heap_entry_t t_rd0_data, t_rd1_data, t_wr_data;
  logic        t_we, t_cnt_we;
  logic        ev_direct, ev_heapify, ev_replace, ev_reject;
  heap_operation #(.B(B)) u_heap_operation (
    .clk, .rst_n, .clear(hop_clear),
    .in_valid(cur_valid), .in_entry(cur_entry), .in_ready(cur_ready),
    .rd0_addr(t_rd0_addr), .rd0_data(t_rd0_data),
    .rd1_addr(t_rd1_addr), .rd1_data(t_rd1_data),
    .we(t_we), .wr_addr(t_wr_addr), .wr_data(t_wr_data),
    .cnt_we(t_cnt_we), .cnt_wdata(t_cnt_wdata), .count(t_count),
    .idle(hop_idle), .ev_direct, .ev_heapify, .ev_replace, .ev_reject);

  // ---------------- HEAP_SELECT, HEAP_1, HEAP_2 ----------------
  logic        hs_init, hs_swap, hs_sel;
  state_t      h1_rd0_addr, h1_rd1_addr, h1_wr_addr, h1_row_addr, h1_cnt_wdata, h1_count;
  state_t      h2_rd0_addr, h2_rd1_addr, h2_wr_addr, h2_row_addr, h2_cnt_wdata, h2_count;
  heap_entry_t h1_rd0_data, h1_rd1_data, h1_wr_data, h2_rd0_data, h2_rd1_data, h2_wr_data;
  heap_entry_t h1_row_data [LANES];
  heap_entry_t h2_row_data [LANES];
  logic        h1_we, h1_cnt_we, h2_we, h2_cnt_we;

  heap_select u_heap_select (
    .clk, .rst_n, .init(hs_init), .swap(hs_swap), .sel(hs_sel),
    .t_rd0_addr, .t_rd0_data, .t_rd1_addr, .t_rd1_data, .t_we, .t_wr_addr, .t_wr_data,
    .t_cnt_we, .t_cnt_wdata, .t_count,
    .p_row_addr, .p_row_data, .p_count,
    .h1_rd0_addr, .h1_rd0_data, .h1_rd1_addr, .h1_rd1_data, .h1_we, .h1_wr_addr, .h1_wr_data,
    .h1_row_addr, .h1_row_data, .h1_cnt_we, .h1_cnt_wdata, .h1_count,
    .h2_rd0_addr, .h2_rd0_data, .h2_rd1_addr, .h2_rd1_data, .h2_we, .h2_wr_addr, .h2_wr_data,
    .h2_row_addr, .h2_row_data, .h2_cnt_we, .h2_cnt_wdata, .h2_count);

  heap_ram #(.B(B)) u_heap_1 (
    .clk, .rst_n, .rd0_addr(h1_rd0_addr), .rd0_data(h1_rd0_data),
    .rd1_addr(h1_rd1_addr), .rd1_data(h1_rd1_data),
    .we(h1_we), .wr_addr(h1_wr_addr), .wr_data(h1_wr_data),
    .row_addr(h1_row_addr), .row_data(h1_row_data),
    .cnt_we(h1_cnt_we), .cnt_wdata(h1_cnt_wdata), .count(h1_count));

  heap_ram #(.B(B)) u_heap_2 (
    .clk, .rst_n, .rd0_addr(h2_rd0_addr), .rd0_data(h2_rd0_data),
    .rd1_addr(h2_rd1_addr), .rd1_data(h2_rd1_data),
    .we(h2_we), .wr_addr(h2_wr_addr), .wr_data(h2_wr_data),
    .row_addr(h2_row_addr), .row_data(h2_row_data),
    .cnt_we(h2_cnt_we), .cnt_wdata(h2_cnt_wdata), .count(h2_count));

  assign p_row_addr = (st == S_DP) ? fm_row_addr : op_row_addr;

  // ---------------- OUTPUT_PATH ----------------
  logic bt_miss;
  output_path #(.K(K), .M(M), .T_MAX(T_MAX)) u_output_path (
    .clk, .rst_n,
    .bt_start, .bt_root((m_r == 0) && (n_r == len_r - 1'b1)), .bt_n(n_r), .bt_tmid(tmid_r),
    .pre_count(p_count), .row_addr(op_row_addr), .row_data(p_row_data),
    .bt_done, .bt_miss,
    .lk0_t((m_r == 0) ? time_t'(0) : m_r - 1'b1), .lk0_q(q_prev),
    .lk1_t(n_r), .lk1_q(),
    .wb_start, .seq_len(len_r),
    .mem_req(cl_req[3]), .mem_ready(cl_ready[3]), .wb_done);

  // ---------------- sequencer ----------------
  assign obc_off = (st == S_DP0 || st == S_DP) ? (t_r - m_r) : time_t'(0);

  always_comb begin
    tq_start = 1'b0; tq_ready = 1'b0; obc_start = 1'b0; init_start = 1'b0;
    fm_start = 1'b0; hop_clear = 1'b0; hs_init = 1'b0; hs_swap = 1'b0;
    bt_start = 1'b0; wb_start = 1'b0;
    unique case (st)
      S_IDLE:  if (start) begin tq_start = 1'b1; hs_init = 1'b1; end
      S_POP:   if (tq_valid) begin tq_ready = 1'b1; obc_start = 1'b1; end
               else if (tq_all_done) wb_start = 1'b1;
      S_FILL:  if (obc_done) hop_clear = 1'b1;
      S_INIT0: init_start = 1'b1;
      S_INIT:  if (phase_done && hop_idle) hs_swap = 1'b1;
      S_DP0:   begin hop_clear = 1'b1; fm_start = 1'b1; end
      S_DP:    if (phase_done && hop_idle) hs_swap = 1'b1;
      S_BT0:   bt_start = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; m_r <= '0; n_r <= '0; tmid_r <= '0; t_r <= '0; len_r <= '0;
      phase_done <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if ((st == S_INIT && init_done) || (st == S_DP && fm_done)) phase_done <= 1'b1;
      unique case (st)
        S_IDLE: if (start) begin
          len_r <= seq_len;
          st    <= S_POP;
        end
        S_POP: begin
          if (tq_valid) begin
            m_r    <= tq_task.m;
            n_r    <= tq_task.n;
            tmid_r <= time_t'((32'(tq_task.m) + 32'(tq_task.n)) >> 1);
            st     <= S_FILL;
          end else if (tq_all_done) begin
            st <= S_WB;
          end
        end
        S_FILL:  if (obc_done) st <= S_INIT0;
        S_INIT0: begin phase_done <= 1'b0; st <= S_INIT; end
        S_INIT:  if (phase_done && hop_idle) begin
          t_r <= m_r + 1'b1;
          st  <= S_DP0;
        end
        S_DP0:   begin phase_done <= 1'b0; st <= S_DP; end
        S_DP:    if (phase_done && hop_idle) begin
          if (t_r == n_r) st <= S_BT0;
          else begin
            t_r <= t_r + 1'b1;
            st  <= S_DP0;
          end
        end
        S_BT0:   st <= S_BT;
        S_BT:    if (bt_done) st <= S_POP;
        S_WB:    if (wb_done) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
endmodule
