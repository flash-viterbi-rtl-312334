// ddr_controller: request arbiter and response router in front of DDR.
//
// The accelerator's DDR users (OB_CACHE, INITIALIZE, FINDMAX, OUTPUT_PATH)
// each present a request of up to LANES word addresses (a gather read) or
// a single-word write. This block grants one client per cycle by fixed
// priority (lowest index first), forwards its request to the memory side
// and remembers, in an in-order tag FIFO, which client each read belongs
// to. Read data returning from the memory side, which is in request order
// and cannot be stalled, is routed back to that client. Writes produce no
// response. A read is accepted only while the tag FIFO has room, which
// bounds the reads in flight to TAG_DEP.
//
// The memory side is a plain valid/ready request plus an in-order response
// stream; the DRAM controller and PHY proper (command scheduling, refresh,
// DQ timing) lie beyond this port and are not described by the paper.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module ddr_controller
  import flash_pkg::*;
#(
  parameter int N_CL    = 4,
  parameter int TAG_DEP = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t cl_req   [N_CL],
  output logic     cl_ready [N_CL],
  output mem_rsp_t cl_rsp   [N_CL],
  output mem_req_t ddr_req,
  input  logic     ddr_ready,
  input  mem_rsp_t ddr_rsp
);
  localparam int CW = (N_CL > 1) ? $clog2(N_CL) : 1;

  logic [CW-1:0] grant, head;
  logic          any, t_empty, t_full, accept_rd;
  logic [$clog2(TAG_DEP+1)-1:0] tcnt;

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int c = N_CL - 1; c >= 0; c--) begin
      if (cl_req[c].valid) begin
        any   = 1'b1;
        grant = CW'(c);
      end
    end
    ddr_req = '0;
    if (any && (cl_req[grant].we || !t_full)) ddr_req = cl_req[grant];
    for (int c = 0; c < N_CL; c++)
      cl_ready[c] = any && (grant == CW'(c)) && ddr_ready && (cl_req[c].we || !t_full);
    accept_rd = ddr_req.valid && !ddr_req.we && ddr_ready;
    for (int c = 0; c < N_CL; c++) begin
      cl_rsp[c].data  = ddr_rsp.data;
      cl_rsp[c].valid = ddr_rsp.valid && (head == CW'(c));
    end
  end

  sync_fifo #(.WIDTH(CW), .DEPTH(TAG_DEP)) u_tags (
    .clk, .rst_n, .clear(1'b0),
    .push(accept_rd), .wr_data(grant),
    .pop(ddr_rsp.valid), .rd_data(head),
    .empty(t_empty), .full(t_full), .count(tcnt));

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n) ddr_rsp.valid |-> !t_empty);
endmodule
