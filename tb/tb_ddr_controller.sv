// tb_ddr_controller: four clients issue random gather reads (and client 3
// also writes) at the same time through the arbiter into a stalling DDR
// model whose word at address a holds a*3+1. Every client must receive
// exactly its own responses, in its own order, with the right data in
// every enabled lane, and every write must land in memory. The tag FIFO
// is kept small so its full condition also throttles reads.
module tb_ddr_controller;
  import flash_pkg::*;
  localparam int N = 4, WORDS = 4096, NREQ = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mem_req_t cl_req [N];
  logic     cl_ready [N];
  mem_rsp_t cl_rsp [N];
  mem_req_t ddr_req; logic ddr_ready; mem_rsp_t ddr_rsp;
  int nr, nw, ns;

  ddr_controller #(.N_CL(N), .TAG_DEP(4)) dut (.clk, .rst_n, .cl_req, .cl_ready, .cl_rsp,
    .ddr_req, .ddr_ready, .ddr_rsp);
  ddr_model #(.WORDS(WORDS), .LAT(6), .STALL_PCT(25)) mem (.clk, .rst_n, .req(ddr_req), .ready(ddr_ready),
    .rsp(ddr_rsp), .n_reads(nr), .n_writes(nw), .n_stalls(ns));

  // expected responses per client: lane enables and addresses
  typedef struct { logic [LANES-1:0] en; int a [LANES]; } exp_t;
  exp_t exq [N][$];
  int issued [N], got [N], wr_done;
  int wr_addr_q [$], wr_data_q [$];

  function automatic mem_req_t new_req(int c);
    mem_req_t r;
    r = '0;
    r.valid = 1'b1;
    if (c == 3 && ($urandom % 3) == 0) begin
      r.we = 1'b1;
      r.lane_en = LANES'(1);
      r.addr[0] = addr_t'(2048 + ($urandom % 1024));
      r.wdata = data_t'($urandom);
    end else begin
      r.lane_en = LANES'($urandom) | LANES'(1);
      for (int l = 0; l < LANES; l++) r.addr[l] = addr_t'(c * 512 + ($urandom % 512));
    end
    return r;
  endfunction

  for (genvar c = 0; c < N; c++) begin : g_cl
    always @(posedge clk) begin
      if (!rst_n) begin
        cl_req[c] <= '0;
      end else begin
        if (cl_req[c].valid && cl_ready[c]) begin
          if (cl_req[c].we) begin
            wr_addr_q.push_back(int'(cl_req[c].addr[0]));
            wr_data_q.push_back(int'(cl_req[c].wdata));
          end else begin
            exp_t e;
            e.en = cl_req[c].lane_en;
            for (int l = 0; l < LANES; l++) e.a[l] = int'(cl_req[c].addr[l]);
            exq[c].push_back(e);
          end
          issued[c]++;
        end
        if ((!cl_req[c].valid || cl_ready[c]) && issued[c] + (cl_req[c].valid && cl_ready[c] ? 1 : 0) < NREQ)
          cl_req[c] <= (($urandom % 4) != 0) ? new_req(c) : '0;
        else if (cl_ready[c])
          cl_req[c] <= '0;
        if (cl_rsp[c].valid) begin
          exp_t e;
          checks++;
          if (exq[c].size() == 0) begin
            failures++; $display("client %0d: unexpected response", c);
          end else begin
            e = exq[c].pop_front();
            for (int l = 0; l < LANES; l++)
              if (e.en[l]) begin
                checks++;
                if (int'(cl_rsp[c].data[l]) != e.a[l] * 3 + 1) begin
                  failures++; $display("client %0d lane %0d: %0d expected %0d", c, l, cl_rsp[c].data[l], e.a[l]*3+1);
                end
              end
          end
          got[c]++;
        end
      end
    end
  end

  initial begin
    for (int a = 0; a < WORDS; a++) mem.mem[a] = data_t'(a * 3 + 1);
    for (int c = 0; c < N; c++) begin issued[c] = 0; got[c] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    while (!(issued[0] >= NREQ && issued[1] >= NREQ && issued[2] >= NREQ && issued[3] >= NREQ)) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int c = 0; c < N; c++) begin
      checks++;
      if (exq[c].size() != 0) begin failures++; $display("client %0d: %0d responses missing", c, exq[c].size()); end
    end
    foreach (wr_addr_q[i]) begin
      checks++;
      // later writes to the same address win
      if (int'(mem.mem[wr_addr_q[i]]) != wr_data_q[i]) begin
        bit later;
        later = 0;
        for (int k = i + 1; k < wr_addr_q.size(); k++) if (wr_addr_q[k] == wr_addr_q[i]) later = 1;
        if (!later) begin failures++; $display("write %0d lost", i); end
      end
    end
    checks++; if (wr_addr_q.size() == 0 || ns == 0) begin failures++; $display("no writes or no stalls"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
