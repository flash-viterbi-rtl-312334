// tb_heap_select: two heaps behind the double-buffer selector. Each
// timestep the testbench writes a fresh set of entries and a count through
// the heap_total port, swaps, and checks that the row port and pre count
// now show exactly those entries while the new heap_total reads back the
// entries written two timesteps earlier (the buffers alternate, nothing is
// copied). init must return HEAP_1 to the heap_total role.
module tb_heap_select;
  import flash_pkg::*;
  localparam int B = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init, swap, sel;
  state_t t_rd0_addr, t_rd1_addr, t_wr_addr, t_cnt_wdata, t_count, p_row_addr, p_count;
  heap_entry_t t_rd0_data, t_rd1_data, t_wr_data;
  heap_entry_t p_row_data [LANES];
  logic t_we, t_cnt_we;
  state_t h1_rd0_addr, h1_rd1_addr, h1_wr_addr, h1_row_addr, h1_cnt_wdata, h1_count;
  state_t h2_rd0_addr, h2_rd1_addr, h2_wr_addr, h2_row_addr, h2_cnt_wdata, h2_count;
  heap_entry_t h1_rd0_data, h1_rd1_data, h1_wr_data, h2_rd0_data, h2_rd1_data, h2_wr_data;
  heap_entry_t h1_row_data [LANES];
  heap_entry_t h2_row_data [LANES];
  logic h1_we, h1_cnt_we, h2_we, h2_cnt_we;

  heap_select dut (.clk, .rst_n, .init, .swap, .sel,
    .t_rd0_addr, .t_rd0_data, .t_rd1_addr, .t_rd1_data, .t_we, .t_wr_addr, .t_wr_data,
    .t_cnt_we, .t_cnt_wdata, .t_count, .p_row_addr, .p_row_data, .p_count,
    .h1_rd0_addr, .h1_rd0_data, .h1_rd1_addr, .h1_rd1_data, .h1_we, .h1_wr_addr, .h1_wr_data,
    .h1_row_addr, .h1_row_data, .h1_cnt_we, .h1_cnt_wdata, .h1_count,
    .h2_rd0_addr, .h2_rd0_data, .h2_rd1_addr, .h2_rd1_data, .h2_we, .h2_wr_addr, .h2_wr_data,
    .h2_row_addr, .h2_row_data, .h2_cnt_we, .h2_cnt_wdata, .h2_count);
  heap_ram #(.B(B)) u_h1 (.clk, .rst_n, .rd0_addr(h1_rd0_addr), .rd0_data(h1_rd0_data),
    .rd1_addr(h1_rd1_addr), .rd1_data(h1_rd1_data), .we(h1_we), .wr_addr(h1_wr_addr),
    .wr_data(h1_wr_data), .row_addr(h1_row_addr), .row_data(h1_row_data),
    .cnt_we(h1_cnt_we), .cnt_wdata(h1_cnt_wdata), .count(h1_count));
  heap_ram #(.B(B)) u_h2 (.clk, .rst_n, .rd0_addr(h2_rd0_addr), .rd0_data(h2_rd0_data),
    .rd1_addr(h2_rd1_addr), .rd1_data(h2_rd1_data), .we(h2_we), .wr_addr(h2_wr_addr),
    .wr_data(h2_wr_data), .row_addr(h2_row_addr), .row_data(h2_row_data),
    .cnt_we(h2_cnt_we), .cnt_wdata(h2_cnt_wdata), .count(h2_count));

  heap_entry_t hist [8][B];
  int cnts [8];

  initial begin
    init = 0; swap = 0; t_we = 0; t_cnt_we = 0; t_rd0_addr = '0; t_rd1_addr = '0; t_wr_addr = '0;
    t_wr_data = '0; t_cnt_wdata = '0; p_row_addr = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    checks++; if (sel != 0) begin failures++; $display("sel after init"); end
    for (int ts = 0; ts < 8; ts++) begin
      cnts[ts] = 1 + int'($urandom % B);
      for (int i = 0; i < B; i++) begin
        hist[ts][i].state = state_t'($urandom); hist[ts][i].prob = score_t'($urandom);
        hist[ts][i].mid = state_t'($urandom);
        t_we = 1; t_wr_addr = state_t'(i); t_wr_data = hist[ts][i];
        @(negedge clk);
      end
      t_we = 0; t_cnt_we = 1; t_cnt_wdata = state_t'(cnts[ts]);
      @(negedge clk);
      t_cnt_we = 0;
      checks++; if (int'(t_count) != cnts[ts]) begin failures++; $display("ts %0d total count", ts); end
      swap = 1; @(negedge clk); swap = 0;
      checks++; if (int'(p_count) != cnts[ts]) begin failures++; $display("ts %0d pre count %0d", ts, p_count); end
      for (int r = 0; r < (B + LANES - 1) / LANES; r++) begin
        p_row_addr = state_t'(r); #1;
        for (int l = 0; l < LANES; l++) if (r * LANES + l < B) begin
          checks++;
          if (p_row_data[l] != hist[ts][r*LANES+l]) begin failures++; $display("ts %0d pre row %0d lane %0d", ts, r, l); end
        end
      end
      if (ts >= 1) begin
        for (int i = 0; i < B; i++) begin
          t_rd0_addr = state_t'(i); t_rd1_addr = state_t'(i); #1;
          checks++;
          if (t_rd0_data != hist[ts-1][i] || t_rd1_data != hist[ts-1][i]) begin
            failures++; $display("ts %0d total still holds old entry %0d", ts, i);
          end
        end
      end
      @(negedge clk);
    end
    init = 1; @(negedge clk); init = 0;
    checks++; if (sel != 0) begin failures++; $display("sel after second init"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
