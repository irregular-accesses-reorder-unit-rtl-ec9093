// iru_reordering_hash_tb: random insertions and removals against a model
// that keeps one list per set. Indices come from a small pool of memory
// blocks so that entries fill up and duplicates occur. Each cycle the test
// checks ins_ready (refused for a full entry or a pop in the same bank),
// the merge flag, the popped element and count, the fullest set, the empty
// flag, and, at the end of each phase, every entry's contents. The phases
// run without filtering, with FILT_DROP, with FILT_MIN and with FILT_FADD
// (integer-valued floats, so sums are exact), and end with a clear.
module iru_reordering_hash_tb;
  import iru_pkg::*;
  localparam int SETS = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0;
  iru_filter_e filter;
  logic ins_valid, ins_ready, ins_merged, ins_stall, pop_valid, empty;
  iru_elem_t ins_elem, pop_elem;
  logic [7:0] pop_set, best_set;
  logic [5:0] pop_cnt, best_cnt;
  int checks = 0, failures = 0, n_stall = 0, n_conf = 0, n_merge = 0, n_full = 0;

  iru_reordering_hash dut (.clk, .rst_n, .clear, .filter, .tgt_base(32'h0), .tgt_wlog2(3'd2),
    .ins_valid, .ins_elem, .ins_ready, .ins_merged, .ins_full_stall(ins_stall),
    .pop_valid, .pop_set, .pop_elem, .pop_cnt, .best_set, .best_cnt, .empty);

  iru_elem_t model [SETS][$];

  function automatic int lset_of(input logic [23:0] idx);
    int blk = int'(idx) >> 5;         // 32 four-byte elements per 128-byte block, base 0
    int g = (blk & 32'h3ff) ^ ((blk >> 10) & 32'h3ff) ^ ((blk >> 20) & 32'h3ff);
    return g / 4;
  endfunction
  function automatic logic [31:0] i2f(input int v);
    return $shortrealtobits(shortreal'(v));
  endfunction

  task automatic ck(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 15) $display("FAIL %0t: %s", $time, s); end
  endtask

  task automatic run_phase(input iru_filter_e f, input int cycles);
    filter = f;
    for (int c = 0; c < cycles; c++) begin
      int s, dup, mx, mxs, exp_ready;
      logic [23:0] idx;
      @(negedge clk);
      idx = 24'($urandom_range(0, 40) * 32 + $urandom_range(0, (f == FILT_NONE) ? 31 : 5));
      ins_valid = ($urandom_range(99) < 70);
      ins_elem.idx = idx;
      ins_elem.sec = (f == FILT_FADD) ? i2f($urandom_range(1, 50)) : $urandom;
      ins_elem.pos = 24'($urandom);
      // pop from the fullest set, or a random non-empty one
      pop_valid = 0; pop_set = '0;
      if ($urandom_range(99) < 30) begin
        for (int k = 0; k < SETS; k++) begin
          int q = (k + $urandom_range(0, SETS - 1)) % SETS;
          if (model[q].size() > 0) begin pop_set = 8'(q); pop_valid = 1; break; end
        end
        if ($urandom_range(1) == 1 && best_cnt != 0) pop_set = best_set;
      end
      #1;
      s = lset_of(idx);
      dup = -1;
      if (f != FILT_NONE) foreach (model[s][j]) if (dup < 0 && model[s][j].idx == idx) dup = j;
      exp_ready = !(pop_valid && pop_set[0] == s[0]) && !(dup < 0 && model[s].size() == 32);
      if (ins_valid) ck(ins_ready == exp_ready, "ins_ready");
      ck(ins_merged == (ins_valid && exp_ready && dup >= 0), "merge flag");
      ck(ins_stall == (ins_valid && dup < 0 && model[s].size() == 32), "full stall flag");
      mx = 0; mxs = 0;
      for (int k = 0; k < SETS; k++) if (model[k].size() > mx) begin mx = model[k].size(); mxs = k; end
      ck(best_cnt == 6'(mx) && (mx == 0 || best_set == 8'(mxs)), "fullest set");
      if (pop_valid) begin
        ck(pop_cnt == 6'(model[pop_set].size()), "pop count");
        ck(pop_elem == model[pop_set][$], "popped element is the entry's top");
      end
      begin
        int tot = 0;
        for (int k = 0; k < SETS; k++) tot += model[k].size();
        ck(empty == (tot == 0), "empty flag");
      end
      if (ins_valid && !exp_ready && !(pop_valid && pop_set[0] == s[0])) n_stall++;
      if (ins_valid && pop_valid && pop_set[0] == s[0]) n_conf++;
      if (mx == 32) n_full++;
      @(posedge clk);
      if (pop_valid) void'(model[pop_set].pop_back());
      if (ins_valid && exp_ready) begin
        if (dup >= 0) begin
          n_merge++;
          if (f == FILT_MIN && ins_elem.sec < model[s][dup].sec) model[s][dup].sec = ins_elem.sec;
          if (f == FILT_FADD)
            model[s][dup].sec = $shortrealtobits($bitstoshortreal(model[s][dup].sec) + $bitstoshortreal(ins_elem.sec));
        end else model[s].push_back(ins_elem);
      end
    end
    @(negedge clk); ins_valid = 0; pop_valid = 0;
    // walk every entry through the pop port
    for (int k = 0; k < SETS; k++) begin
      while (model[k].size() > 0) begin
        @(negedge clk); pop_set = 8'(k); pop_valid = 1; #1;
        ck(pop_elem == model[k][$], "entry contents");
        @(posedge clk); void'(model[k].pop_back());
      end
    end
    @(negedge clk); pop_valid = 0; #1;
    ck(empty && best_cnt == 0, "drained");
  endtask

  initial begin
    ins_valid = 0; pop_valid = 0; pop_set = 0; ins_elem = '0; filter = FILT_NONE;
    repeat (3) @(posedge clk); rst_n = 1;
    run_phase(FILT_NONE, 3000);
    run_phase(FILT_DROP, 1500);
    run_phase(FILT_MIN, 1500);
    run_phase(FILT_FADD, 1500);
    // clear empties the table
    @(negedge clk); filter = FILT_NONE; ins_valid = 1; ins_elem.idx = 24'd5; pop_valid = 0;
    @(negedge clk); ins_valid = 0; clear = 1;
    @(negedge clk); clear = 0; #1;
    ck(empty && best_cnt == 0, "clear");
    ck(n_stall > 0 && n_conf > 0 && n_merge > 0 && n_full > 0, "stall, bank conflict, merge and full entry all seen");
    $display("stalls=%0d conflicts=%0d merges=%0d", n_stall, n_conf, n_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
