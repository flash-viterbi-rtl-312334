// heap_select: double-buffer control of the two beam heaps.
//
// HEAP_1 and HEAP_2 swap roles every timestep: one is heap_total, which
// collects the candidates of the timestep being computed, the other is
// heap_pre, which holds the candidates of the previous timestep and is only
// read. Swapping roles instead of copying the new candidates back is the
// paper's double-buffering scheme. sel = 0 makes HEAP_1 heap_total; a
// one-cycle swap pulse toggles it and init returns it to 0.
//
// The block steers the heap maintenance port (two reads, one write, count
// update) to heap_total and the row-scan port to heap_pre, and returns
// each heap's status (count) to its user. Everything except sel is
// combinational.
module heap_select
  import flash_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        swap,
  output logic        sel,
  // heap_total side (heap maintenance)
  input  state_t      t_rd0_addr,
  output heap_entry_t t_rd0_data,
  input  state_t      t_rd1_addr,
  output heap_entry_t t_rd1_data,
  input  logic        t_we,
  input  state_t      t_wr_addr,
  input  heap_entry_t t_wr_data,
  input  logic        t_cnt_we,
  input  state_t      t_cnt_wdata,
  output state_t      t_count,
  // heap_pre side (row scans)
  input  state_t      p_row_addr,
  output heap_entry_t p_row_data [LANES],
  output state_t      p_count,
  // HEAP_1
  output state_t      h1_rd0_addr,
  input  heap_entry_t h1_rd0_data,
  output state_t      h1_rd1_addr,
  input  heap_entry_t h1_rd1_data,
  output logic        h1_we,
  output state_t      h1_wr_addr,
  output heap_entry_t h1_wr_data,
  output state_t      h1_row_addr,
  input  heap_entry_t h1_row_data [LANES],
  output logic        h1_cnt_we,
  output state_t      h1_cnt_wdata,
  input  state_t      h1_count,
  // HEAP_2
  output state_t      h2_rd0_addr,
  input  heap_entry_t h2_rd0_data,
  output state_t      h2_rd1_addr,
  input  heap_entry_t h2_rd1_data,
  output logic        h2_we,
  output state_t      h2_wr_addr,
  output heap_entry_t h2_wr_data,
  output state_t      h2_row_addr,
  input  heap_entry_t h2_row_data [LANES],
  output logic        h2_cnt_we,
  output state_t      h2_cnt_wdata,
  input  state_t      h2_count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sel <= 1'b0;
    else if (init) sel <= 1'b0;
    else if (swap) sel <= ~sel;
  end

  always_comb begin
    // address and data go to both; enables only to the selected heap
    h1_rd0_addr = t_rd0_addr;  h2_rd0_addr = t_rd0_addr;
    h1_rd1_addr = t_rd1_addr;  h2_rd1_addr = t_rd1_addr;
    h1_wr_addr  = t_wr_addr;   h2_wr_addr  = t_wr_addr;
    h1_wr_data  = t_wr_data;   h2_wr_data  = t_wr_data;
    h1_cnt_wdata = t_cnt_wdata; h2_cnt_wdata = t_cnt_wdata;
    h1_row_addr = p_row_addr;  h2_row_addr = p_row_addr;
    h1_we     = t_we     && !sel;
    h2_we     = t_we     &&  sel;
    h1_cnt_we = t_cnt_we && !sel;
    h2_cnt_we = t_cnt_we &&  sel;
    t_rd0_data = sel ? h2_rd0_data : h1_rd0_data;
    t_rd1_data = sel ? h2_rd1_data : h1_rd1_data;
    t_count    = sel ? h2_count    : h1_count;
    p_count    = sel ? h1_count    : h2_count;
    for (int l = 0; l < LANES; l++) p_row_data[l] = sel ? h1_row_data[l] : h2_row_data[l];
  end
endmodule
