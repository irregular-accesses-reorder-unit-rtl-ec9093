// iru_top_tb: end-to-end test of the four-partition IRU at its default sizes.
//
// The testbench plays the rest of the GPU. A memory model per partition
// answers the prefetcher's 128-byte line reads after a random latency and
// with random back-pressure, from an indices array and a secondary array
// that the testbench generates (a mix of indices clustered in a few hot
// memory blocks and scattered ones, with duplicates). An SM model per
// partition issues load_iru requests with random gaps and a bounded number
// outstanding, takes the replies with random back-pressure and collects the
// delivered elements. Three kernels are run back to back, each configured
// through the host port: plain reordering with a secondary array (SSSP-like,
// FILT_NONE), merging by float addition (PageRank-like, FILT_FADD) and
// merging by integer minimum (FILT_MIN). A kernel ends once every partition
// has answered a request with an empty reply, which it only does when its
// hash is empty after all data was inserted.
// Checks: every delivered element is an element of the input (index,
// position and secondary agree); without filtering each position arrives
// exactly once; with FADD the per-index sums, with MIN the per-index minima
// equal those of the input; the IRU's replies touch fewer memory blocks per
// warp on average than the same data in its original order. Each mechanism
// (ring forward, ring injection, ring insertion, merge, full-entry stall,
// reply from a full entry, after a timeout, during the final merge, empty
// reply, memory and reply back-pressure) must occur at least once.
module iru_top_tb;
  import iru_pkg::*;

  localparam int NP = 4;
  localparam int N  = 3000;
  localparam logic [31:0] TGT_BASE = 32'h1000_0000;
  localparam logic [31:0] IDX_BASE = 32'h2000_0000;
  localparam logic [31:0] SEC_BASE = 32'h3000_0000;
  localparam int MAXOUT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_we;
  logic [2:0]  cfg_addr;
  logic [31:0] cfg_wdata;
  iru_phase_e  phase;

  logic [NP-1:0]              mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [NP-1:0][ADDR_W-1:0]  mem_req_addr;
  logic [NP-1:0][3:0]         mem_req_tag, mem_rsp_tag;
  logic [NP-1:0][LINE_BITS-1:0] mem_rsp_data;
  logic [NP-1:0]              req_valid, req_ready, rsp_valid, rsp_ready;
  iru_req_t [NP-1:0]          req_data;
  iru_rsp_t [NP-1:0]          rsp_data;
  logic [NP-1:0] ev_merge, ev_full_stall, ev_ring_insert, ev_forward, ev_inject;
  logic [NP-1:0] ev_rep_full, ev_rep_timeout, ev_rep_flush, ev_rep_empty;

  iru_top dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .phase_o(phase),
    .mem_req_valid, .mem_req_addr, .mem_req_tag, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_tag, .mem_rsp_data,
    .req_valid, .req_data, .req_ready, .rsp_valid, .rsp_data, .rsp_ready,
    .ev_merge, .ev_full_stall, .ev_ring_insert, .ev_forward, .ev_inject,
    .ev_rep_full, .ev_rep_timeout, .ev_rep_flush, .ev_rep_empty
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- input data ----------------
  logic [31:0] mem_idx [N];
  logic [31:0] mem_sec [N];

  function automatic logic [31:0] int2f(input int v);   // exact for 0 < v < 2^24
    int e = 0;
    while ((v >> (e + 1)) != 0) e++;
    return {1'b0, 8'(127 + e), 23'((v << (23 - e)) & 32'h7f_ffff)};
  endfunction
  function automatic longint f2int(input logic [31:0] f);
    int e = int'(f[30:23]) - 127;
    longint m = {1'b1, f[22:0]};
    if (f[30:23] == 0) return 0;
    return (e >= 23) ? (m << (e - 23)) : (m >> (23 - e));
  endfunction

  task automatic gen_data(input int seed_mode);
    for (int i = 0; i < N; i++) begin
      if ($urandom_range(99) < 65) mem_idx[i] = 32'($urandom_range(15) * 32 + $urandom_range(31));
      else                         mem_idx[i] = 32'($urandom_range(24'hff_ffff));
      if (seed_mode == 1) mem_sec[i] = int2f($urandom_range(1, 9));
      else                mem_sec[i] = $urandom_range(1, 100000);
    end
  endtask

  // ---------------- memory model ----------------
  typedef struct { int due; logic [3:0] tag; logic [31:0] addr; } mreq_t;
  mreq_t mq [NP][$];
  int    cycle = 0;
  int    n_mem_bp = 0, n_rsp_bp = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [LINE_BITS-1:0] line_of(input logic [31:0] addr);
    logic [LINE_BITS-1:0] d = '0;
    logic [31:0] base = (addr >= SEC_BASE) ? SEC_BASE : IDX_BASE;
    int first = int'((addr - base) >> 2);
    for (int k = 0; k < 32; k++) begin
      if (first + k < N) d[32*k +: 32] = (addr >= SEC_BASE) ? mem_sec[first + k] : mem_idx[first + k];
    end
    return d;
  endfunction

  for (genvar p = 0; p < NP; p++) begin : g_mem
    always @(posedge clk) begin
      mem_req_ready[p] <= ($urandom_range(99) < 80);
      mem_rsp_valid[p] <= 1'b0;
      if (mem_req_valid[p] && mem_req_ready[p]) begin
        mreq_t r;
        r.due = cycle + int'($urandom_range(6, 40));
        r.tag = mem_req_tag[p];
        r.addr = mem_req_addr[p];
        // the prefetcher only reads lines of its own partition
        check(((mem_req_addr[p] & 32'h0fff_ffff) >> 7) % NP == p, "line read by its owner");
        mq[p].push_back(r);
      end
      if (mem_req_valid[p] && !mem_req_ready[p]) n_mem_bp++;
      if (mq[p].size() > 0) begin
        // pick any due request (out of order return)
        for (int j = 0; j < mq[p].size(); j++) begin
          if (mq[p][j].due <= cycle) begin
            mem_rsp_valid[p] <= 1'b1;
            mem_rsp_tag[p]   <= mq[p][j].tag;
            mem_rsp_data[p]  <= line_of(mq[p][j].addr);
            mq[p].delete(j);
            break;
          end
        end
      end
    end
  end

  // ---------------- SM model ----------------
  int  outstanding [NP];
  bit  issuing;
  bit  got_empty [NP];
  int  recv_n;
  logic [23:0] r_idx [$];
  logic [23:0] r_pos [$];
  logic [31:0] r_sec [$];
  iru_lane_t [WARP-1:0] beat0 [NP];
  int  iru_blocks = 0, iru_warps = 0;
  int  n_ring_fwd = 0, n_inject = 0, n_ring_ins = 0, n_merge = 0, n_stall = 0;
  int  n_full = 0, n_timeout = 0, n_flush = 0, n_empty = 0;
  bit  sec_on;

  task automatic take_reply(input int p, input iru_lane_t [WARP-1:0] b0, input iru_lane_t [WARP-1:0] b1);
    logic [24:0] blks [$];
    int nv = 0;
    for (int l = 0; l < WARP; l++) begin
      if (b0[l].valid) begin
        logic [24:0] blk = 25'((TGT_BASE + (32'(b0[l].data[47:24]) << 2)) >> 7);
        bit seen = 0;
        foreach (blks[j]) if (blks[j] == blk) seen = 1;
        if (!seen) blks.push_back(blk);
        r_idx.push_back(b0[l].data[47:24]);
        r_pos.push_back(b0[l].data[23:0]);
        r_sec.push_back(sec_on ? b1[l].data[31:0] : 32'd0);
        nv++;
      end
      if (l > 0 && b0[l].valid) check(b0[l-1].valid, "valid lanes packed at the start of the warp");
    end
    if (nv > 0) begin
      iru_blocks += blks.size();
      iru_warps++;
    end else got_empty[p] = 1;
    recv_n += nv;
  endtask

  for (genvar p = 0; p < NP; p++) begin : g_sm
    always @(posedge clk) begin
      if (!rst_n) begin
        req_valid[p] <= 1'b0;
        rsp_ready[p] <= 1'b0;
      end else begin
        if (req_valid[p] && req_ready[p]) begin
          outstanding[p]++;
        end
        if (req_valid[p] && req_ready[p]) req_valid[p] <= 1'b0;
        if ((!req_valid[p] || req_ready[p]) && issuing && !got_empty[p]
            && outstanding[p] + int'(req_valid[p] && req_ready[p]) < MAXOUT
            && $urandom_range(99) < 4) begin
          req_valid[p] <= 1'b1;
          req_data[p]  <= '{sm: 8'(p), warp: 8'($urandom_range(63))};
        end
        rsp_ready[p] <= ($urandom_range(99) < 85);
        if (rsp_valid[p] && !rsp_ready[p]) n_rsp_bp++;
        if (rsp_valid[p] && rsp_ready[p]) begin
          if (!rsp_data[p].beat) beat0[p] <= rsp_data[p].lane;
          if (rsp_data[p].last) begin
            take_reply(p, rsp_data[p].beat ? beat0[p] : rsp_data[p].lane, rsp_data[p].lane);
            outstanding[p]--;
          end
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) begin
      n_ring_fwd += int'(ev_forward[p]);  n_inject += int'(ev_inject[p]);
      n_ring_ins += int'(ev_ring_insert[p]); n_merge += int'(ev_merge[p]);
      n_stall    += int'(ev_full_stall[p]);
      n_full     += int'(ev_rep_full[p]);  n_timeout += int'(ev_rep_timeout[p]);
      n_flush    += int'(ev_rep_flush[p]); n_empty   += int'(ev_rep_empty[p]);
    end
  end

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  function automatic int base_blocks();
    int total = 0;
    for (int w = 0; w * 32 < N; w++) begin
      logic [24:0] blks [$];
      for (int l = 0; l < 32 && w * 32 + l < N; l++) begin
        logic [24:0] blk = 25'((TGT_BASE + (mem_idx[w*32+l][23:0] << 2)) >> 7);
        bit seen = 0;
        foreach (blks[j]) if (blks[j] == blk) seen = 1;
        if (!seen) blks.push_back(blk);
      end
      total += blks.size();
    end
    return total;
  endfunction

  task automatic run_kernel(input iru_filter_e f, input int data_mode);
    int t0;
    gen_data(data_mode);
    r_idx.delete(); r_pos.delete(); r_sec.delete();
    recv_n = 0; iru_blocks = 0; iru_warps = 0;
    for (int p = 0; p < NP; p++) got_empty[p] = 0;
    sec_on = 1;
    wr(REG_TGT_BASE, TGT_BASE);
    wr(REG_TGT_WLOG, 32'd2);
    wr(REG_IDX_BASE, IDX_BASE);
    wr(REG_SEC_BASE, SEC_BASE);
    wr(REG_NUM, N);
    wr(REG_FLAGS, {29'd0, f, 1'b1});
    wr(REG_START, 32'd1);
    t0 = cycle;
    issuing = 1;
    wait (got_empty[0] && got_empty[1] && got_empty[2] && got_empty[3]);
    issuing = 0;
    wait (outstanding[0] == 0 && outstanding[1] == 0 && outstanding[2] == 0 && outstanding[3] == 0);
    repeat (5) @(posedge clk);
    $display("kernel filter=%0d: %0d elements delivered in %0d cycles, %0d warps with data",
             f, recv_n, cycle - t0, iru_warps);
    check(phase == PH_FLUSH, "phase FLUSH at kernel end");
    // every delivered element exists in the input
    foreach (r_pos[i]) begin
      check(r_pos[i] < N && mem_idx[r_pos[i]][23:0] == r_idx[i], "delivered index matches its position");
    end
    if (f == FILT_NONE) begin
      bit seen [N];
      int dup = 0, miss = 0;
      foreach (r_pos[i]) begin
        if (seen[r_pos[i]]) dup++;
        seen[r_pos[i]] = 1;
        check(r_sec[i] == mem_sec[r_pos[i]], "secondary travels with its index");
      end
      for (int i = 0; i < N; i++) if (!seen[i]) miss++;
      check(recv_n == N && dup == 0 && miss == 0, "each element delivered exactly once");
      begin
        int bb = base_blocks();
        int bw = (N + 31) / 32;
        $display("  memory blocks per warp: baseline %0d/%0d, IRU %0d/%0d", bb, bw, iru_blocks, iru_warps);
        check(iru_blocks * bw < bb * iru_warps, "IRU improves coalescing over the original order");
      end
    end else begin
      longint isum [logic [23:0]];
      longint osum [logic [23:0]];
      longint imin [logic [23:0]];
      longint omin [logic [23:0]];
      for (int i = 0; i < N; i++) begin
        logic [23:0] x = mem_idx[i][23:0];
        longint v = (f == FILT_FADD) ? f2int(mem_sec[i]) : longint'(mem_sec[i]);
        if (!isum.exists(x)) begin isum[x] = 0; imin[x] = v; end
        isum[x] += v;
        if (v < imin[x]) imin[x] = v;
      end
      foreach (r_idx[i]) begin
        longint v = (f == FILT_FADD) ? f2int(r_sec[i]) : longint'(r_sec[i]);
        if (!osum.exists(r_idx[i])) begin osum[r_idx[i]] = 0; omin[r_idx[i]] = v; end
        osum[r_idx[i]] += v;
        if (v < omin[r_idx[i]]) omin[r_idx[i]] = v;
      end
      check(osum.num() == isum.num(), "every distinct index delivered");
      check(recv_n < N, "duplicates filtered");
      foreach (isum[x]) begin
        if (f == FILT_FADD) check(osum.exists(x) && osum[x] == isum[x], "float-add merge keeps per-index sum");
        else                check(omin.exists(x) && omin[x] == imin[x], "min merge keeps per-index minimum");
      end
      $display("  %0d of %0d elements filtered (%0d%%)", N - recv_n, N, (N - recv_n) * 100 / N);
    end
  endtask

  initial begin
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0; issuing = 0;
    for (int p = 0; p < NP; p++) outstanding[p] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    run_kernel(FILT_NONE, 0);
    run_kernel(FILT_FADD, 1);
    run_kernel(FILT_MIN, 0);
    $display("events: ring_fwd=%0d inject=%0d ring_ins=%0d merge=%0d full_stall=%0d rep_full=%0d rep_timeout=%0d rep_flush=%0d rep_empty=%0d mem_bp=%0d rsp_bp=%0d",
             n_ring_fwd, n_inject, n_ring_ins, n_merge, n_stall, n_full, n_timeout, n_flush, n_empty, n_mem_bp, n_rsp_bp);
    check(n_ring_fwd > 0, "ring pass-through happened");
    check(n_inject > 0,   "ring injection happened");
    check(n_ring_ins > 0, "insertion from the ring happened");
    check(n_merge > 0,    "merge happened");
    check(n_stall > 0,    "full-entry stall happened");
    check(n_full > 0,     "full-entry reply happened");
    check(n_timeout > 0,  "timeout reply happened");
    check(n_flush > 0,    "final-merge reply happened");
    check(n_empty > 0,    "empty reply happened");
    check(n_mem_bp > 0,   "memory back-pressure happened");
    check(n_rsp_bp > 0,   "reply back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // progress watchdog: a kernel that stops replying for 50000 cycles is stuck
  int last_reply = 0;
  always @(posedge clk) begin
    if (|(rsp_valid & rsp_ready) || !issuing) last_reply <= cycle;
    else if (cycle - last_reply > 50_000) begin
      failures++;
      $display("FAIL: no reply for 50000 cycles");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
