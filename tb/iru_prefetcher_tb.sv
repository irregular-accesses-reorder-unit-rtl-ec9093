// iru_prefetcher_tb: the prefetcher of partition 2 of 4 reads from a memory
// model that returns lines out of order after random latencies and refuses
// requests at random. The test checks the request addresses (only lines l
// with l mod 4 == 2, of the indices array and, when enabled, of the
// secondary array), that no more than 8 slots' lines are ever in flight or
// buffered, that the head slots appear in line order with the right 24-bit
// indices, secondary words and element count (a short last line), and that
// done_o rises after the last line. It runs once with and once without a
// secondary array, and measures that 8 prefetches overlap the latency.
module iru_prefetcher_tb;
  import iru_pkg::*;
  localparam int NP = 4, ME = 2, N = 970;   // last line (30) is short and ours
  localparam logic [31:0] IB = 32'h0010_0000, SB = 32'h0020_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start;
  iru_cfg_t cfg;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, head_valid, head_pop, done;
  logic [31:0] mem_req_addr;
  logic [3:0] mem_req_tag, mem_rsp_tag;
  logic [LINE_BITS-1:0] mem_rsp_data;
  logic [POS_W-1:0] head_line;
  logic [WARP-1:0][IDX_W-1:0] head_idx;
  logic [WARP-1:0][SEC_W-1:0] head_sec;
  logic [5:0] head_cnt;
  int checks = 0, failures = 0, max_inflight = 0, inflight = 0, n_bp = 0, n_idx_req = 0, n_popped = 0;
  typedef struct { int due; logic [3:0] tag; logic [31:0] addr; } mreq_t;
  mreq_t q[$];
  int cycle = 0;

  iru_prefetcher #(.NUM_PARTS(NP), .PART_ID(ME)) dut (.clk, .rst_n, .start, .cfg,
    .mem_req_valid, .mem_req_addr, .mem_req_tag, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_tag, .mem_rsp_data,
    .head_valid, .head_line, .head_idx, .head_sec, .head_cnt, .head_pop, .done_o(done));

  function automatic logic [31:0] word(input logic [31:0] a);
    return a * 32'h9e37_79b9 ^ (a >> 7);
  endfunction

  task automatic ck(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, s); end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    mem_req_ready <= ($urandom_range(99) < 75);
    mem_rsp_valid <= 0;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      mreq_t r;
      int line;
      r.due = cycle + $urandom_range(5, 60); r.tag = mem_req_tag; r.addr = mem_req_addr;
      line = int'((mem_req_addr - ((mem_req_addr >= SB) ? SB : IB)) >> 7);
      ck(line % NP == ME, "only own lines are read");
      ck(mem_req_addr[6:0] == 0, "line aligned");
      ck(cfg.sec_en || mem_req_addr < SB, "no secondary reads when disabled");
      q.push_back(r);
      if (mem_req_addr < SB) n_idx_req++;
    end
    if (rst_n && mem_req_valid && !mem_req_ready) n_bp++;
    for (int j = 0; j < q.size(); j++) begin
      if (q[j].due <= cycle && $urandom_range(1) == 1) begin
        mem_rsp_valid <= 1; mem_rsp_tag <= q[j].tag;
        for (int k = 0; k < 32; k++) mem_rsp_data[32*k +: 32] <= word(q[j].addr + 32'(4 * k));
        q.delete(j);
        break;
      end
    end
  end

  task automatic run(input bit sec);
    int expect_line, lines, t0, t1;
    cfg = '0; cfg.idx_base = IB; cfg.sec_base = SB; cfg.sec_en = sec; cfg.num_elems = N;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = cycle;
    expect_line = ME; lines = 0;
    while (expect_line * 32 < N) begin
      @(negedge clk);
      head_pop = head_valid && ($urandom_range(99) < 60);
      #1;
      inflight = n_idx_req - n_popped;
      if (inflight > max_inflight) max_inflight = inflight;
      ck(inflight <= 8, "at most 8 prefetches");
      if (head_pop) begin
        int cnt;
        cnt = (N - expect_line * 32 >= 32) ? 32 : N - expect_line * 32;
        ck(head_line == 24'(expect_line), "lines in order");
        ck(head_cnt == 6'(cnt), "element count");
        for (int k = 0; k < WARP; k++) begin
          ck(head_idx[k] == word(IB + 32'(expect_line * 128 + 4 * k))[23:0], "index words");
          ck(head_sec[k] == (sec ? word(SB + 32'(expect_line * 128 + 4 * k)) : 32'd0), "secondary words");
        end
        expect_line += NP; lines++; n_popped++;
      end
      ck(!done || expect_line * 32 >= N, "done only at the end");
    end
    @(negedge clk); head_pop = 0;
    @(negedge clk);
    ck(done, "done after the last line");
    t1 = cycle;
    $display("sec=%0d: %0d lines in %0d cycles, max in flight %0d", sec, lines, t1 - t0, max_inflight);
  endtask

  initial begin
    start = 0; head_pop = 0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(1);
    run(0);
    ck(max_inflight == 8, "8 prefetches in flight were reached");
    ck(n_bp > 0, "memory back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
