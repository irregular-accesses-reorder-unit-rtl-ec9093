// iru_classifier: splits prefetched elements into a local queue and a ring
// queue.
//
// The Classifier reads the prefetcher's head slot one lane per cycle. For
// each element it forms {index, secondary, position = 32*line + lane}, runs
// the hashing function and sends the element to the local queue when its set
// lives in this partition (PART_ID), or to the ring queue, tagged with the
// destination partition, otherwise. A full target queue stalls the lane
// counter. After the last valid lane of the slot (head_cnt) the slot is
// released with head_pop. Both queues are CQ_DEPTH deep; with 80-bit
// elements two 64-entry queues are 1.25 KB, close to the paper's 1.2 KB
// Classifier buffer. The paper gives the split into small FIFO queues and the
// hash-based choice between local bank and ring; the single element per
// cycle (rather than one per queue) and the queue depth are this design's.
module iru_classifier
  import iru_pkg::*;
#(
  parameter int unsigned CQ_DEPTH  = 64,
  parameter int unsigned NUM_PARTS = 4,
  parameter int unsigned SETS      = 256,
  parameter int unsigned PART_ID   = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  iru_cfg_t          cfg,
  // from the prefetcher
  input  logic              head_valid,
  input  logic [POS_W-1:0]  head_line,
  input  logic [WARP-1:0][IDX_W-1:0] head_idx,
  input  logic [WARP-1:0][SEC_W-1:0] head_sec,
  input  logic [$clog2(WARP+1)-1:0]  head_cnt,
  output logic              head_pop,
  // local queue head
  output logic              loc_valid,
  output iru_elem_t         loc_elem,
  input  logic              loc_pop,
  // ring queue head
  output logic              rq_valid,
  output iru_ring_t         rq_data,
  input  logic              rq_pop,
  output logic              idle_o
);
  localparam int unsigned WW = $clog2(WARP);

  logic [WW-1:0] lane;
  iru_elem_t     e;
  logic [7:0]    dest;
  logic [$clog2(SETS)-1:0] lset_unused;
  logic          to_local, loc_full, rq_full, loc_empty, rq_empty, fire;
  logic [$clog2(CQ_DEPTH+1)-1:0] loc_count, rq_count;

  iru_hash_fn #(.NUM_SETS_G(SETS * NUM_PARTS), .NUM_PARTS(NUM_PARTS)) u_hash (
    .idx(e.idx), .tgt_base(cfg.tgt_base), .tgt_wlog2(cfg.tgt_wlog2),
    .part(dest), .lset(lset_unused)
  );

  always_comb begin
    e.idx    = head_idx[lane];
    e.sec    = head_sec[lane];
    e.pos    = (head_line << WW) | POS_W'(lane);
    to_local = (dest == 8'(PART_ID));
    fire     = head_valid && (to_local ? !loc_full : !rq_full);
    head_pop = fire && ((($clog2(WARP+1))'(lane) + 1'b1) >= head_cnt);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || start) lane <= '0;
    else if (fire)       lane <= head_pop ? '0 : lane + 1'b1;
  end

  iru_fifo #(.WIDTH($bits(iru_elem_t)), .DEPTH(CQ_DEPTH)) u_loc (
    .clk, .rst_n, .push(fire && to_local), .din(e), .pop(loc_pop),
    .dout(loc_elem), .empty(loc_empty), .full(loc_full), .count(loc_count)
  );
  iru_fifo #(.WIDTH($bits(iru_ring_t)), .DEPTH(CQ_DEPTH)) u_rq (
    .clk, .rst_n, .push(fire && !to_local), .din({dest, e}), .pop(rq_pop),
    .dout(rq_data), .empty(rq_empty), .full(rq_full), .count(rq_count)
  );

  assign loc_valid = !loc_empty;
  assign rq_valid  = !rq_empty;
  assign idle_o    = loc_empty && rq_empty && !head_valid;
endmodule
