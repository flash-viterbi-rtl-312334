// tb_heap_ram: writes random entries, then checks both single-entry read
// ports, the row port (including the zero padding past B) and the count
// register against a copy kept in the testbench.
module tb_heap_ram;
  import flash_pkg::*;
  localparam int B = 21;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  state_t rd0_addr, rd1_addr, wr_addr, row_addr, cnt_wdata, count;
  heap_entry_t rd0_data, rd1_data, wr_data;
  heap_entry_t row_data [LANES];
  logic we, cnt_we;
  heap_entry_t shadow [B];

  heap_ram #(.B(B)) dut (.clk, .rst_n, .rd0_addr, .rd0_data, .rd1_addr, .rd1_data, .we, .wr_addr,
    .wr_data, .row_addr, .row_data, .cnt_we, .cnt_wdata, .count);

  initial begin
    we = 0; cnt_we = 0; rd0_addr = '0; rd1_addr = '0; wr_addr = '0; wr_data = '0; row_addr = '0; cnt_wdata = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (count != 0) begin failures++; $display("count after reset %0d", count); end
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < B; i++) begin
        heap_entry_t e;
        e.state = state_t'($urandom); e.prob = score_t'($urandom); e.mid = state_t'($urandom);
        we = 1; wr_addr = state_t'(i); wr_data = e; shadow[i] = e;
        @(negedge clk);
      end
      we = 0;
      cnt_we = 1; cnt_wdata = state_t'(pass + 5);
      @(negedge clk);
      cnt_we = 0;
      checks++; if (int'(count) != pass + 5) begin failures++; $display("count %0d", count); end
      for (int i = 0; i < B; i++) begin
        rd0_addr = state_t'(i); rd1_addr = state_t'(B - 1 - i);
        #1;
        checks++; if (rd0_data != shadow[i]) begin failures++; $display("rd0 %0d", i); end
        checks++; if (rd1_data != shadow[B-1-i]) begin failures++; $display("rd1 %0d", i); end
      end
      for (int r = 0; r < (B + LANES - 1) / LANES; r++) begin
        row_addr = state_t'(r);
        #1;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (r * LANES + l < B) begin
            if (row_data[l] != shadow[r*LANES+l]) begin failures++; $display("row %0d lane %0d", r, l); end
          end else if (row_data[l] != '0) begin failures++; $display("pad row %0d lane %0d", r, l); end
        end
      end
      @(negedge clk);
    end
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
