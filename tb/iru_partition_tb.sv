// iru_partition_tb: one IRU partition working alone (NUM_PARTS = 1, its ring
// link looped back, its idle flag fed back as "all data inserted"). The host
// port configures it for 700 elements with a secondary array; a memory model
// answers its line reads out of order; an SM model issues requests and takes
// the two-beat replies. The test checks that every element arrives exactly
// once with its secondary value, that the phase reaches FLUSH, that the
// partition then answers with an empty reply, and that both full-entry and
// final-merge replies occurred. A second run with FILT_DROP checks that every
// distinct index is delivered exactly once.
module iru_partition_tb;
  import iru_pkg::*;
  localparam int N = 700;
  localparam logic [31:0] TB_ = 32'h0000_0000, IB = 32'h0100_0000, SB = 32'h0200_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0; logic [2:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic idle; iru_phase_e phase;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr; logic [3:0] mem_req_tag, mem_rsp_tag; logic [LINE_BITS-1:0] mem_rsp_data;
  logic lv, lr; iru_ring_t ld;
  logic req_valid, req_ready, rsp_valid, rsp_ready; iru_req_t req_data; iru_rsp_t rsp;
  logic e_merge, e_stall, e_ri, e_f, e_i, e_full, e_to, e_fl, e_em;
  int checks = 0, failures = 0, cycle = 0, n_full = 0, n_flush = 0, n_empty = 0, n_merge = 0;
  logic [31:0] mem_idx [N], mem_sec [N];
  int got [N];
  int recv_n = 0;
  bit got_empty;
  typedef struct { int due; logic [3:0] tag; logic [31:0] addr; } mreq_t;
  mreq_t q[$];

  iru_partition #(.NUM_PARTS(1), .PART_ID(0), .SETS(64), .TIMEOUT(200)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .all_inserted_i(idle), .idle_o(idle), .phase_o(phase),
    .mem_req_valid, .mem_req_addr, .mem_req_tag, .mem_req_ready, .mem_rsp_valid, .mem_rsp_tag, .mem_rsp_data,
    .lin_valid(lv), .lin_data(ld), .lin_ready(lr), .lout_valid(lv), .lout_data(ld), .lout_ready(lr),
    .req_valid, .req_data, .req_ready, .rsp_valid, .rsp_data(rsp), .rsp_ready,
    .ev_merge(e_merge), .ev_full_stall(e_stall), .ev_ring_insert(e_ri), .ev_forward(e_f), .ev_inject(e_i),
    .ev_rep_full(e_full), .ev_rep_timeout(e_to), .ev_rep_flush(e_fl), .ev_rep_empty(e_em));

  task automatic ck(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 15) $display("FAIL %0t: %s", $time, s); end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      n_full += int'(e_full); n_flush += int'(e_fl); n_empty += int'(e_em); n_merge += int'(e_merge);
      ck(!(e_ri || e_f || e_i), "no ring traffic with one partition");
    end
    mem_req_ready <= ($urandom_range(99) < 80);
    mem_rsp_valid <= 0;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      mreq_t r; r.due = cycle + $urandom_range(4, 30); r.tag = mem_req_tag; r.addr = mem_req_addr;
      q.push_back(r);
    end
    for (int j = 0; j < q.size(); j++) if (q[j].due <= cycle) begin
      logic [31:0] b; int f;
      b = (q[j].addr >= SB) ? SB : IB;
      f = int'((q[j].addr - b) >> 2);
      mem_rsp_valid <= 1; mem_rsp_tag <= q[j].tag;
      for (int k = 0; k < 32; k++)
        mem_rsp_data[32*k +: 32] <= (f + k < N) ? ((b == SB) ? mem_sec[f + k] : mem_idx[f + k]) : 32'd0;
      q.delete(j);
      break;
    end
  end

  // SM model: one request outstanding at a time
  iru_rsp_t b0;
  always @(posedge clk) begin
    if (!rst_n) begin req_valid <= 0; rsp_ready <= 0; end
    else begin
      rsp_ready <= 1'b1;
      if (rsp_valid && rsp_ready) begin
        if (!rsp.beat) b0 <= rsp;
        if (rsp.last) begin
          int nv;
          nv = 0;
          for (int l = 0; l < 32; l++) if (rsp.beat ? b0.lane[l].valid : rsp.lane[l].valid) begin
            int p;
            p = int'(rsp.beat ? b0.lane[l].data[23:0] : rsp.lane[l].data[23:0]);
            nv++;
            if (p < N) begin
              got[p]++;
              ck((rsp.beat ? b0.lane[l].data[47:24] : rsp.lane[l].data[47:24]) == mem_idx[p][23:0], "index matches position");
              if (rsp.beat) ck(rsp.lane[l].data[31:0] == mem_sec[p], "secondary matches");
            end else ck(0, "position in range");
          end
          recv_n += nv;
          if (nv == 0) got_empty = 1;
        end
      end
    end
  end

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input iru_filter_e f);
    for (int i = 0; i < N; i++) begin
      // the first half lands in four blocks so that entries fill up
      mem_idx[i] = (f != FILT_NONE) ? $urandom_range(0, 299) : (i < N / 2) ? $urandom_range(0, 127) : $urandom_range(0, 4095);
      mem_sec[i] = $urandom; got[i] = 0;
    end
    recv_n = 0; got_empty = 0;
    wr(REG_TGT_BASE, TB_); wr(REG_TGT_WLOG, 2); wr(REG_IDX_BASE, IB); wr(REG_SEC_BASE, SB);
    wr(REG_NUM, N); wr(REG_FLAGS, {29'd0, f, 1'b1}); wr(REG_START, 1);
    while (!got_empty) begin
      @(negedge clk);
      if (!req_valid && $urandom_range(99) < 20) begin
        req_valid = 1; req_data = '{sm: 8'd1, warp: 8'($urandom)};
      end
      @(posedge clk);
      if (req_valid && req_ready) begin
        @(negedge clk); req_valid = 0;
        // wait for the reply before the next request
        while (!(rsp_valid && rsp_ready && rsp.last)) @(posedge clk);
      end
    end
    repeat (4) @(posedge clk);  // let the registered event strobes land
    ck(phase == PH_FLUSH, "FLUSH reached");
    if (f == FILT_NONE) begin
      int bad = 0;
      for (int i = 0; i < N; i++) if (got[i] != 1) bad++;
      ck(bad == 0 && recv_n == N, "each element exactly once");
    end else begin
      int per [int];
      // an index can come back again once its first copy has left the hash
      for (int i = 0; i < N; i++) if (got[i] > 0) per[int'(mem_idx[i])] += got[i];
      for (int i = 0; i < N; i++) ck(per.exists(int'(mem_idx[i])) && got[i] <= 1, "each distinct index delivered, each position at most once");
      ck(recv_n < N, "duplicates were filtered");
    end
    $display("filter=%0d: %0d elements delivered", f, recv_n);
  endtask

  initial begin
    req_valid = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(FILT_NONE);
    run(FILT_DROP);
    ck(n_full > 0 && n_flush > 0 && n_empty >= 2 && n_merge > 0, "full, final-merge, empty replies and merges seen");
    $display("full=%0d flush=%0d empty=%0d merge=%0d", n_full, n_flush, n_empty, n_merge);
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
