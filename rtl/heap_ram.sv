// heap_ram: storage of one beam heap (HEAP_1 or HEAP_2).
//
// Holds up to B candidates (State, OptProb, MidState) in heap array order
// plus the number of valid entries (the heap status). Two single-entry
// read ports and one write port serve the heap maintenance unit, which
// needs a node's two children in the same cycle during sift-down; a row
// port returns LANES consecutive entries, row r covering indices
// r*LANES .. r*LANES+LANES-1, for the units that scan the previous
// timestep's candidates. Indices past B read as zero.
//
// All reads are asynchronous and the write is synchronous, i.e. a
// distributed-RAM/register organisation; the paper maps the heaps to block
// RAM, whose registered read would add one cycle per heap level. The count
// is written through cnt_we/cnt_wdata.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module heap_ram
  import flash_pkg::*;
#(
  parameter int B = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  state_t      rd0_addr,
  output heap_entry_t rd0_data,
  input  state_t      rd1_addr,
  output heap_entry_t rd1_data,
  input  logic        we,
  input  state_t      wr_addr,
  input  heap_entry_t wr_data,
  input  state_t      row_addr,
  output heap_entry_t row_data [LANES],
  input  logic        cnt_we,
  input  state_t      cnt_wdata,
  output state_t      count
);
  heap_entry_t mem [B];

  assign rd0_data = (32'(rd0_addr) < B) ? mem[rd0_addr] : '0;
  assign rd1_data = (32'(rd1_addr) < B) ? mem[rd1_addr] : '0;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned idx;
      idx = 32'(row_addr) * LANES + l;
      row_data[l] = (idx < B) ? mem[idx] : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (we && 32'(wr_addr) < B) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      count <= '0;
    else if (cnt_we) count <= cnt_wdata;
  end

  a_wr_range: assert property (@(posedge clk) disable iff (!rst_n) we |-> 32'(wr_addr) < B);
  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n) cnt_we |-> 32'(cnt_wdata) <= B);
endmodule
