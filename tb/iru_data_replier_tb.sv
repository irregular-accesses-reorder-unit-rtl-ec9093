// iru_data_replier_tb: the replier is connected to a reordering hash (16
// sets, one partition) that the test fills through its insertion port. It
// checks, in turn: a full entry answers the oldest request with exactly its
// 32 elements within 40 cycles, in two beats ({index, position} then the
// secondary values) that hold still under back-pressure; a request that
// finds no full entry is not answered before TIMEOUT cycles, then gathers the
// fullest entries and waits for more data until it has 32 elements; in the
// FLUSH phase the remaining elements are sent packed at the low lanes and a
// request finding the hash empty gets an all-invalid reply; replies follow
// request order and carry the requester's SM and warp; a full request buffer
// drops req_ready; without a secondary array a reply is a single beat.
module iru_data_replier_tb;
  import iru_pkg::*;
  localparam int TO = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  iru_phase_e phase;
  logic sec_en;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  iru_req_t req_data;
  iru_rsp_t rsp;
  logic pop_valid, hash_empty, ins_valid, ins_ready, ins_merged, ins_stall;
  logic [3:0] pop_set, best_set;
  logic [5:0] pop_cnt, best_cnt;
  iru_elem_t pop_elem, ins_elem;
  logic ev_full, ev_timeout, ev_flush, ev_empty;
  int checks = 0, failures = 0, n_full = 0, n_timeout = 0, n_flush = 0, n_empty = 0, cycle = 0;

  iru_data_replier #(.REQ_DEPTH(4), .TIMEOUT(TO), .SETS(16)) dut (.clk, .rst_n, .phase, .sec_en,
    .req_valid, .req_data, .req_ready, .rsp_valid, .rsp_o(rsp), .rsp_ready,
    .pop_valid, .pop_set, .pop_elem, .pop_cnt, .best_set, .best_cnt, .hash_empty,
    .ev_full, .ev_timeout, .ev_flush, .ev_empty);
  iru_reordering_hash #(.SETS(16), .NUM_PARTS(1)) u_hash (.clk, .rst_n, .clear(1'b0), .filter(FILT_NONE),
    .tgt_base(32'h0), .tgt_wlog2(3'd2), .ins_valid, .ins_elem, .ins_ready, .ins_merged,
    .ins_full_stall(ins_stall), .pop_valid, .pop_set, .pop_elem, .pop_cnt, .best_set, .best_cnt,
    .empty(hash_empty));

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      n_full += int'(ev_full); n_timeout += int'(ev_timeout); n_flush += int'(ev_flush); n_empty += int'(ev_empty);
    end
  end

  task automatic ck(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 15) $display("FAIL %0t: %s", $time, s); end
  endtask

  // insert n elements of memory block blk; positions from p0, secondary = ~position
  task automatic insert(input int blk, input int n, input int p0);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      ins_valid = 1;
      ins_elem = '{idx: 24'(blk * 32 + (i % 32)), sec: ~32'(p0 + i), pos: 24'(p0 + i)};
      #1;
      while (!ins_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); ins_valid = 0;
  endtask

  task automatic request(input int sm, input int w);
    @(negedge clk);
    req_valid = 1; req_data = '{sm: 8'(sm), warp: 8'(w)};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
  endtask

  // receive one reply; returns the number of valid lanes, the positions in pos[]
  int got_pos [32];
  task automatic receive(input int sm, input int w, output int nvalid, output int at);
    iru_rsp_t b0;
    nvalid = 0;
    rsp_ready = 0;
    while (!rsp_valid) @(negedge clk);
    repeat (2) begin @(negedge clk); ck(rsp_valid && rsp == rsp, "beat held under back-pressure"); end
    b0 = rsp;
    ck(b0.beat == 0 && b0.req.sm == 8'(sm) && b0.req.warp == 8'(w), "reply for the right warp, beat 0 first");
    for (int l = 0; l < 32; l++) begin
      if (b0.lane[l].valid) begin
        got_pos[nvalid] = int'(b0.lane[l].data[23:0]);
        nvalid++;
      end
      if (l > 0 && b0.lane[l].valid) ck(b0.lane[l-1].valid, "valid lanes packed");
    end
    at = cycle;
    rsp_ready = 1;
    @(negedge clk);
    if (sec_en) begin
      ck(rsp_valid && rsp.beat == 1 && rsp.last, "second beat with the secondary data");
      for (int l = 0; l < 32; l++) begin
        if (b0.lane[l].valid) ck(rsp.lane[l].data[31:0] == ~32'(b0.lane[l].data[23:0]), "secondary value matches its element");
      end
      @(negedge clk);
    end else ck(b0.last, "single beat without a secondary array");
    rsp_ready = 0;
  endtask

  function automatic bit has_all(input int p0, input int n, input int nvalid);
    bit seen [int];
    for (int i = 0; i < nvalid; i++) seen[got_pos[i]] = 1;
    for (int i = p0; i < p0 + n; i++) if (!seen.exists(i)) return 0;
    return 1;
  endfunction

  initial begin
    int nv, at, t0;
    phase = PH_IDLE; sec_en = 1; req_valid = 0; rsp_ready = 0; ins_valid = 0; ins_elem = '0; req_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // requests wait while the IRU is idle
    request(3, 7);
    repeat (300) @(negedge clk);
    ck(!rsp_valid, "no reply while idle");
    phase = PH_RUN;
    // 1. full entry
    insert(2, 32, 1000);
    t0 = cycle;
    receive(3, 7, nv, at);
    ck(nv == 32 && has_all(1000, 32, nv), "full entry delivered whole");
    ck(at - t0 <= 40, "full entry answered without waiting for the timeout");
    ck(hash_empty, "entry evicted");
    // 2. timeout
    insert(5, 5, 2000);
    request(1, 9);
    t0 = cycle;
    repeat (TO - 10) @(negedge clk);
    ck(!rsp_valid, "no reply before the timeout");
    repeat (30) @(negedge clk);
    ck(!rsp_valid, "after the timeout it waits for 32 elements");
    insert(6, 20, 3000);
    insert(7, 7, 4000);
    receive(1, 9, nv, at);
    ck(at - t0 >= TO, "timeout respected");
    ck(nv == 32 && has_all(2000, 5, nv) && has_all(3000, 20, nv) && has_all(4000, 7, nv), "timeout reply merges the entries");
    // 3. ordering and back-pressure of the request buffer
    sec_en = 0;
    insert(8, 32, 5000); insert(9, 32, 6000); insert(10, 32, 7000); insert(11, 32, 8000);
    for (int r = 0; r < 4; r++) request(r, 20 + r);   // replies are held: rsp_ready is low
    @(negedge clk); req_valid = 1; req_data = '{sm: 8'd9, warp: 8'd9}; #1;
    ck(!req_ready, "full request buffer refuses");
    @(negedge clk); req_valid = 0;
    for (int r = 0; r < 4; r++) begin
      receive(r, 20 + r, nv, at);
      ck(nv == 32, "full replies in request order");
    end
    // 4. flush: what is left is merged, then empty replies
    sec_en = 1;
    insert(12, 6, 9000); insert(13, 4, 9100);
    phase = PH_FLUSH;
    request(5, 1);
    receive(5, 1, nv, at);
    ck(nv == 10 && has_all(9000, 6, nv) && has_all(9100, 4, nv), "flush merges the remaining entries");
    request(5, 2);
    receive(5, 2, nv, at);
    ck(nv == 0, "empty reply once the hash is empty");
    repeat (3) @(negedge clk);
    // the first request already waited past the timeout while the IRU was idle
    ck(n_full == 4 && n_timeout == 2 && n_flush == 2 && n_empty == 1, "event strobes");
    $display("full=%0d timeout=%0d flush=%0d empty=%0d", n_full, n_timeout, n_flush, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
