// iru_prefetcher: fetches the indices (and secondary) lines owned by this
// memory partition into the prefetch buffer.
//
// After start the prefetcher walks the lines of the indices array that belong
// to partition PART_ID: line l (elements 32l .. 32l+31) is owned by partition
// l mod NUM_PARTS. For each line it allocates one of PF_SLOTS buffer slots and
// issues a 128-byte read to the L2 of its partition, followed by a read of the
// same line of the secondary array when one is configured. At most PF_SLOTS
// lines are therefore in flight, which bounds the memory bandwidth the IRU
// takes. Replies carry the request tag {slot, array} and may come back in any
// order; a slot is presented to the Classifier (head_*) once all its lines
// have arrived, and slots leave in allocation order, so the buffer behaves as
// the paper's FIFO. Each slot keeps the low 24 bits of 32 index words and 32
// secondary words: 8 x 224 B = 1.75 KB, the paper's 1.7 KB prefetch buffer.
//
// Request port: mem_req_valid/ready with a line address and tag. Reply port:
// mem_rsp_valid with tag and the 1024-bit line, always accepted. done_o is
// high once every owned line has been fetched and handed on.
// The paper gives the 8 on-the-fly prefetches, the buffer size and that each
// IRU reads only its own partition; the interleaving rule, the tags and the
// in-order slot drain are this design's choices.
module iru_prefetcher
  import iru_pkg::*;
#(
  parameter int unsigned PF_SLOTS  = 8,
  parameter int unsigned NUM_PARTS = 4,
  parameter int unsigned PART_ID   = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  iru_cfg_t          cfg,
  // L2 read port
  output logic              mem_req_valid,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [$clog2(PF_SLOTS):0] mem_req_tag,
  input  logic              mem_req_ready,
  input  logic              mem_rsp_valid,
  input  logic [$clog2(PF_SLOTS):0] mem_rsp_tag,
  input  logic [LINE_BITS-1:0] mem_rsp_data,
  // head slot towards the classifier
  output logic              head_valid,
  output logic [POS_W-1:0]  head_line,
  output logic [WARP-1:0][IDX_W-1:0] head_idx,
  output logic [WARP-1:0][SEC_W-1:0] head_sec,
  output logic [$clog2(WARP+1)-1:0]  head_cnt,
  input  logic              head_pop,
  output logic              done_o
);
  localparam int unsigned SW = $clog2(PF_SLOTS);
  localparam int unsigned LW = POS_W;

  logic [LW-1:0]  slot_line [PF_SLOTS];
  logic           got_idx   [PF_SLOTS];
  logic           got_sec   [PF_SLOTS];
  logic [WARP-1:0][IDX_W-1:0] slot_idx [PF_SLOTS];
  logic [WARP-1:0][SEC_W-1:0] slot_sec [PF_SLOTS];

  logic [SW-1:0]  alloc_ptr, head_ptr;
  logic [SW:0]    used;
  logic [LW-1:0]  next_line, total_lines;
  logic           sec_phase;     // idx line of the current slot issued, sec line pending
  logic           active;
  logic [LW:0]    remain;

  logic issue_fire, alloc_done;

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_addr  = '0;
    mem_req_tag   = '0;
    if (active) begin
      if (sec_phase) begin
        mem_req_valid = 1'b1;
        mem_req_addr  = cfg.sec_base + (ADDR_W'(next_line) << $clog2(LINE_BYTES));
        mem_req_tag   = {alloc_ptr, 1'b1};
      end else if (next_line < total_lines && used < (SW+1)'(PF_SLOTS)) begin
        mem_req_valid = 1'b1;
        mem_req_addr  = cfg.idx_base + (ADDR_W'(next_line) << $clog2(LINE_BYTES));
        mem_req_tag   = {alloc_ptr, 1'b0};
      end
    end
    issue_fire = mem_req_valid && mem_req_ready;
    // the slot is complete once its last request has been issued
    alloc_done = issue_fire && (sec_phase || !cfg.sec_en);
  end

  always_comb begin
    head_valid = (used != 0) && got_idx[head_ptr] && (got_sec[head_ptr] || !cfg.sec_en);
    head_line  = slot_line[head_ptr];
    head_idx   = slot_idx[head_ptr];
    head_sec   = cfg.sec_en ? slot_sec[head_ptr] : '0;
    remain     = (LW+1)'(cfg.num_elems) - ((LW+1)'(head_line) << $clog2(WARP));
    head_cnt   = (remain >= (LW+1)'(WARP)) ? ($clog2(WARP+1))'(WARP) : ($clog2(WARP+1))'(remain);
    done_o     = !active || (next_line >= total_lines && used == 0 && !sec_phase);
  end

  always_ff @(posedge clk) begin
    if (mem_rsp_valid) begin
      for (int k = 0; k < WARP; k++) begin
        if (mem_rsp_tag[0]) slot_sec[mem_rsp_tag[SW:1]][k] <= mem_rsp_data[32*k +: 32];
        else                slot_idx[mem_rsp_tag[SW:1]][k] <= mem_rsp_data[32*k +: IDX_W];
      end
    end
    if (issue_fire && !sec_phase) slot_line[alloc_ptr] <= next_line;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      alloc_ptr <= '0; head_ptr <= '0; used <= '0; active <= 1'b0; sec_phase <= 1'b0;
      next_line <= '0; total_lines <= '0;
      for (int s = 0; s < PF_SLOTS; s++) begin got_idx[s] <= 1'b0; got_sec[s] <= 1'b0; end
    end else if (start) begin
      alloc_ptr <= '0; head_ptr <= '0; used <= '0; active <= 1'b1; sec_phase <= 1'b0;
      next_line   <= LW'(PART_ID);
      total_lines <= LW'((cfg.num_elems + LW'(WARP - 1)) >> $clog2(WARP));
      for (int s = 0; s < PF_SLOTS; s++) begin got_idx[s] <= 1'b0; got_sec[s] <= 1'b0; end
    end else begin
      if (issue_fire && !sec_phase && cfg.sec_en) sec_phase <= 1'b1;
      if (alloc_done) begin
        sec_phase <= 1'b0;
        alloc_ptr <= (alloc_ptr == SW'(PF_SLOTS - 1)) ? '0 : alloc_ptr + 1'b1;
        next_line <= next_line + LW'(NUM_PARTS);
      end
      used <= used + (SW+1)'(issue_fire && !sec_phase) - (SW+1)'(head_pop && head_valid);
      if (mem_rsp_valid) begin
        if (mem_rsp_tag[0]) got_sec[mem_rsp_tag[SW:1]] <= 1'b1;
        else                got_idx[mem_rsp_tag[SW:1]] <= 1'b1;
      end
      if (head_pop && head_valid) begin
        got_idx[head_ptr] <= 1'b0;
        got_sec[head_ptr] <= 1'b0;
        head_ptr <= (head_ptr == SW'(PF_SLOTS - 1)) ? '0 : head_ptr + 1'b1;
      end
    end
  end

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) head_pop |-> head_valid);
  a_req_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                                mem_req_valid && !mem_req_ready && !start |=> mem_req_valid);
endmodule
