// ob_cache: observation cache of the current subtask.
//
// When a subtask (m,n) is dispatched, fill_start makes this block fetch the
// observation segment x[m..n] from DDR, LANES consecutive words per read
// request, and store it at offsets 0..n-m, so the datapath reads x[t] at
// offset t-m. The fetch engine keeps at most MAX_OUT requests in flight and
// writes the in-order responses as they return; fill_done pulses once the
// last word is stored. The read port is asynchronous (distributed-RAM
// style), which is this design's choice; the paper only says that each
// segment is cached in decoding order before execution.
//
// DEPTH must cover the longest segment, which is the root task of length T.
//
// Lint note: the simulation assertions use 'disable iff (!rst_n)', so a
// linter sees rst_n used both as an asynchronous reset and as a synchronous
// term. The registers themselves use rst_n only as an asynchronous reset.
module ob_cache
  import flash_pkg::*;
#(
  parameter int K       = 512,
  parameter int M       = 50,
  parameter int T_MAX   = 512,
  parameter int DEPTH   = T_MAX,
  parameter int MAX_OUT = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  // fill control
  input  logic     fill_start,
  input  time_t    fill_m,
  input  time_t    fill_len,
  output logic     fill_done,
  output logic     busy,
  // DDR client port
  output mem_req_t mem_req,
  input  logic     mem_ready,
  input  mem_rsp_t mem_rsp,
  // read port
  input  time_t    rd_off,
  output obs_t     rd_obs
);
  obs_t  mem [DEPTH];
  time_t req_off, rsp_off, len, base_m;
  logic  [$clog2(MAX_OUT+1)-1:0] outst;
  logic  issue;

  assign busy   = (rsp_off < len);
  assign rd_obs = mem[rd_off];

  always_comb begin
    mem_req = '0;
    mem_req.valid = busy && (req_off < len) && (32'(outst) < MAX_OUT);
    for (int l = 0; l < LANES; l++) begin
      mem_req.addr[l]    = obs_base(K, M) + addr_t'(base_m) + addr_t'(req_off) + addr_t'(l);
      mem_req.lane_en[l] = (32'(req_off) + l < 32'(len));
    end
  end
  assign issue = mem_req.valid && mem_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_off   <= '0;
      rsp_off   <= '0;
      len       <= '0;
      base_m    <= '0;
      outst     <= '0;
      fill_done <= 1'b0;
    end else begin
      fill_done <= 1'b0;
      if (fill_start) begin
        req_off <= '0;
        rsp_off <= '0;
        len     <= fill_len;
        base_m  <= fill_m;
        outst   <= '0;
      end else begin
        if (issue) req_off <= req_off + time_t'(LANES);
        outst <= outst + $bits(outst)'(issue) - $bits(outst)'(mem_rsp.valid);
        if (mem_rsp.valid) begin
          rsp_off <= rsp_off + time_t'(LANES);
          if (32'(rsp_off) + LANES >= 32'(len)) fill_done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (mem_rsp.valid)
      for (int l = 0; l < LANES; l++)
        if (32'(rsp_off) + l < DEPTH) mem[32'(rsp_off) + l] <= obs_t'(mem_rsp.data[l]);
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
    fill_start |-> (fill_len != 0 && 32'(fill_len) <= DEPTH));
endmodule
