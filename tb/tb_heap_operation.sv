// tb_heap_operation: streams N candidates with distinct states and random
// (often equal) scores into an empty heap and checks that afterwards
//   - the heap holds exactly the B best candidates (score, then smaller
//     state), found by sorting in the testbench,
//   - the array is a valid min-heap (no child better than its parent),
//   - rule counts match: B-1 direct inserts, one heapify, N-B replacements
//     plus rejections, with both of these occurring;
// and that clear empties the heap. Several B, including B = 1 and B not a
// power of two, and N = B (no rule 3) are covered.
module tb_heap_operation;
  import flash_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // one heap maintenance unit with its heap storage per beam width
  `define HEAP_TB_INST(NAME, BV) \
    logic NAME``_clear, NAME``_iv, NAME``_ir, NAME``_we, NAME``_cwe, NAME``_idle; \
    logic NAME``_ed, NAME``_eh, NAME``_erp, NAME``_erj; \
    heap_entry_t NAME``_ie, NAME``_r0d, NAME``_r1d, NAME``_wd; \
    state_t NAME``_r0a, NAME``_r1a, NAME``_wa, NAME``_cwd, NAME``_cnt, NAME``_rowa; \
    heap_entry_t NAME``_rowd [LANES]; \
    heap_operation #(.B(BV)) NAME``_op (.clk, .rst_n, .clear(NAME``_clear), .in_valid(NAME``_iv), \
      .in_entry(NAME``_ie), .in_ready(NAME``_ir), .rd0_addr(NAME``_r0a), .rd0_data(NAME``_r0d), \
      .rd1_addr(NAME``_r1a), .rd1_data(NAME``_r1d), .we(NAME``_we), .wr_addr(NAME``_wa), \
      .wr_data(NAME``_wd), .cnt_we(NAME``_cwe), .cnt_wdata(NAME``_cwd), .count(NAME``_cnt), \
      .idle(NAME``_idle), .ev_direct(NAME``_ed), .ev_heapify(NAME``_eh), .ev_replace(NAME``_erp), \
      .ev_reject(NAME``_erj)); \
    heap_ram #(.B(BV)) NAME``_ram (.clk, .rst_n, .rd0_addr(NAME``_r0a), .rd0_data(NAME``_r0d), \
      .rd1_addr(NAME``_r1a), .rd1_data(NAME``_r1d), .we(NAME``_we), .wr_addr(NAME``_wa), \
      .wr_data(NAME``_wd), .row_addr(NAME``_rowa), .row_data(NAME``_rowd), .cnt_we(NAME``_cwe), \
      .cnt_wdata(NAME``_cwd), .count(NAME``_cnt));

  `HEAP_TB_INST(h13, 13)
  `HEAP_TB_INST(h1, 1)
  `HEAP_TB_INST(h16, 16)

  // generic driver via a small set of references selected by index
  int sel_b;
  heap_entry_t stream [$];
  int n_d, n_h, n_rp, n_rj;

  function automatic bit eb(heap_entry_t a, heap_entry_t b);
    return (a.prob > b.prob) || (a.prob == b.prob && a.state < b.state);
  endfunction

  task automatic make_stream(int n);
    int perm [$];
    stream.delete();
    for (int i = 0; i < n; i++) perm.push_back(i);
    perm.shuffle();
    for (int i = 0; i < n; i++) begin
      heap_entry_t e;
      e.state = state_t'(perm[i]);
      e.prob  = score_t'(-int'($urandom % 20));
      e.mid   = state_t'($urandom % 100);
      stream.push_back(e);
    end
  endtask

  // check the heap content of one instance: contents, heap order
  task automatic check_heap(int B, heap_entry_t arr[$]);
    heap_entry_t srt [$];
    heap_entry_t tmp;
    srt = stream;
    for (int i = 1; i < srt.size(); i++)
      for (int k = i; k > 0 && eb(srt[k], srt[k-1]); k--) begin tmp = srt[k]; srt[k] = srt[k-1]; srt[k-1] = tmp; end
    for (int i = 0; i < B; i++) begin
      bit f;
      f = 0;
      foreach (arr[k]) if (arr[k] == srt[i]) f = 1;
      checks++;
      if (!f) begin failures++; $display("B=%0d: rank %0d candidate (state %0d) missing", B, i, srt[i].state); end
    end
    for (int i = 1; i < B; i++) begin
      checks++;
      if (eb(arr[(i-1)/2], arr[i]) ) begin failures++; $display("B=%0d: heap order broken at %0d", B, i); end
    end
  endtask

  `define HEAP_TB_RUN(NAME, BV, N) \
    begin \
      heap_entry_t arr [$]; \
      make_stream(N); n_d = 0; n_h = 0; n_rp = 0; n_rj = 0; \
      @(negedge clk); NAME``_clear = 1; @(negedge clk); NAME``_clear = 0; \
      checks++; if (NAME``_cnt != 0) begin failures++; $display("clear failed"); end \
      foreach (stream[s]) begin \
        NAME``_iv = 1; NAME``_ie = stream[s]; \
        @(posedge clk); \
        while (!NAME``_ir) @(posedge clk); \
        n_d += NAME``_ed; n_h += NAME``_eh; n_rp += NAME``_erp; n_rj += NAME``_erj; \
        @(negedge clk); \
      end \
      NAME``_iv = 0; \
      while (!NAME``_idle) @(negedge clk); \
      for (int r = 0; r < (BV + LANES - 1) / LANES; r++) begin NAME``_rowa = state_t'(r); #1; \
        for (int l = 0; l < LANES; l++) if (r * LANES + l < BV) arr.push_back(NAME``_rowd[l]); end \
      checks++; if (int'(NAME``_cnt) != BV) begin failures++; $display("B=%0d count %0d", BV, NAME``_cnt); end \
      check_heap(BV, arr); \
      checks++; if (n_d != BV - 1 || n_h != 1 || n_rp + n_rj != N - BV) begin \
        failures++; $display("B=%0d rule counts d=%0d h=%0d rp=%0d rj=%0d", BV, n_d, n_h, n_rp, n_rj); end \
      if (N > 2 * BV) begin \
        checks++; if (n_rp == 0 || n_rj == 0) begin failures++; $display("B=%0d rule 3 not both ways", BV); end \
      end \
    end

  initial begin
    h13_clear = 0; h13_iv = 0; h13_ie = '0; h13_rowa = '0;
    h1_clear = 0;  h1_iv = 0;  h1_ie = '0;  h1_rowa = '0;
    h16_clear = 0; h16_iv = 0; h16_ie = '0; h16_rowa = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    `HEAP_TB_RUN(h13, 13, 60)
    `HEAP_TB_RUN(h13, 13, 13)
    `HEAP_TB_RUN(h13, 13, 100)
    `HEAP_TB_RUN(h1, 1, 30)
    `HEAP_TB_RUN(h16, 16, 200)
    `HEAP_TB_RUN(h16, 16, 40)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
