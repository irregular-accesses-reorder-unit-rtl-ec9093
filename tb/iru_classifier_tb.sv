// iru_classifier_tb: a model prefetcher presents random lines (some shorter
// than 32 elements); the test drains the local and ring queues at random and
// checks that every element arrives exactly once, in order, in the queue the
// hashing function assigns it to, with its position 32*line+lane and the
// destination partition; that a line is released only after its last valid
// lane; that a full queue stalls the classifier; and that idle_o is high
// only when everything has been drained.
module iru_classifier_tb;
  import iru_pkg::*;
  localparam int ME = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  iru_cfg_t cfg;
  logic head_valid, head_pop, loc_valid, loc_pop, rq_valid, rq_pop, idle;
  logic [POS_W-1:0] head_line;
  logic [WARP-1:0][IDX_W-1:0] head_idx;
  logic [WARP-1:0][SEC_W-1:0] head_sec;
  logic [5:0] head_cnt;
  iru_elem_t loc_elem;
  iru_ring_t rq_data;
  int checks = 0, failures = 0, lines_done = 0, n_stall = 0;
  iru_ring_t exp_loc[$], exp_rq[$];

  iru_classifier #(.CQ_DEPTH(16), .PART_ID(ME)) dut (.clk, .rst_n, .start(1'b0), .cfg,
    .head_valid, .head_line, .head_idx, .head_sec, .head_cnt, .head_pop,
    .loc_valid, .loc_elem, .loc_pop, .rq_valid, .rq_data, .rq_pop, .idle_o(idle));

  function automatic int part_of(input logic [23:0] idx);
    longint unsigned a = (longint'(cfg.tgt_base) + (longint'(idx) << cfg.tgt_wlog2)) & 64'hffff_ffff;
    longint unsigned blk = a >> 7;
    int g = 0;
    while (blk != 0) begin g ^= int'(blk & 64'h3ff); blk >>= 10; end
    return g % 4;
  endfunction

  task automatic ck(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, s); end
  endtask

  task automatic new_line(input int l);
    head_line = 24'(l);
    head_cnt  = (l % 5 == 4) ? 6'($urandom_range(1, 31)) : 6'd32;
    for (int k = 0; k < WARP; k++) begin
      head_idx[k] = 24'($urandom);
      head_sec[k] = $urandom;
    end
    for (int k = 0; k < int'(head_cnt); k++) begin
      iru_ring_t r;
      r.dest = 8'(part_of(head_idx[k]));
      r.elem = '{idx: head_idx[k], sec: head_sec[k], pos: 24'(l * 32 + k)};
      if (r.dest == ME) exp_loc.push_back(r); else exp_rq.push_back(r);
    end
  endtask

  always @(negedge clk) begin
    loc_pop = loc_valid && ($urandom_range(99) < 30);
    rq_pop  = rq_valid  && ($urandom_range(99) < 50);
  end
  always @(posedge clk) if (rst_n) begin
    if (loc_pop) begin
      iru_ring_t e;
      e = exp_loc.pop_front();
      ck(loc_elem == e.elem, "local queue element");
    end
    if (rq_pop) begin
      iru_ring_t e;
      e = exp_rq.pop_front();
      ck(rq_data == e, "ring queue element and destination");
    end
  end

  initial begin
    cfg = '0; cfg.tgt_base = 32'h0400_0000; cfg.tgt_wlog2 = 3'd2;
    head_valid = 0; loc_pop = 0; rq_pop = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int l = 0; l < 60; l++) begin
      int cyc;
      @(negedge clk);
      new_line(l);
      head_valid = 1;
      cyc = 0;
      do begin
        @(posedge clk); cyc++;
        if (!head_pop && cyc < int'(head_cnt)) begin end
      end while (!head_pop);
      if (cyc > int'(head_cnt)) n_stall++;
      ck(cyc >= int'(head_cnt), "line released only after its last lane");
      lines_done++;
      @(negedge clk); head_valid = 0;
      if (l % 7 == 0) repeat (20) @(negedge clk);
    end
    repeat (400) @(negedge clk);
    ck(exp_loc.size() == 0 && exp_rq.size() == 0, "all elements delivered");
    ck(idle, "idle after drain");
    ck(n_stall > 0, "full queue stalled the classifier");
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
