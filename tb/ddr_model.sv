// ddr_model: behavioural model of the external DDR memory, for simulation
// only. It stands in for the DRAM device and its vendor controller behind
// the accelerator's memory port.
//
// Word-addressed array of WORDS words. A request is accepted when ready is
// high; ready drops at random in STALL_PCT percent of cycles to exercise
// back-pressure. Every enabled lane of a read returns the word at its own
// address; disabled lanes return 0. Read data appear LAT cycles after
// acceptance, in order, and cannot be stalled. Writes store lane 0's data
// at lane 0's address and produce no response. Testbenches load and
// inspect the array through the mem variable.
module ddr_model
  import flash_pkg::*;
#(
  parameter int WORDS     = 1024,
  parameter int LAT       = 4,
  parameter int STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output logic     ready,
  output mem_rsp_t rsp,
  output int       n_reads,
  output int       n_writes,
  output int       n_stalls
);
  data_t    mem [WORDS];
  mem_rsp_t pipe [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready <= 1'b1;
      n_reads <= 0; n_writes <= 0; n_stalls <= 0;
      for (int i = 0; i < LAT; i++) pipe[i] <= '0;
    end else begin
      mem_rsp_t r;
      ready <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
      if (req.valid && !ready) n_stalls <= n_stalls + 1;
      r = '0;
      if (req.valid && ready) begin
        if (req.we) begin
          mem[req.addr[0]] <= req.wdata;
          n_writes <= n_writes + 1;
        end else begin
          r.valid = 1'b1;
          for (int l = 0; l < LANES; l++)
            r.data[l] = req.lane_en[l] ? mem[req.addr[l]] : '0;
          n_reads <= n_reads + 1;
        end
      end
      pipe[0] <= r;
      for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    end
  end
  assign rsp = pipe[LAT-1];
endmodule
