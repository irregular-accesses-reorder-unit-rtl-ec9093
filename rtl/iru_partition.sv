// iru_partition: one IRU, as it sits in a GPU memory partition next to the
// L2 slice.
//
// Data path: the host configuration reaches the controller; at kernel start
// the prefetcher reads this partition's lines of the indices (and secondary)
// array from the local L2; the classifier splits the elements into those
// whose hash set is local and those owned by another partition; data
// processing inserts local elements, and ring arrivals for this partition,
// into the reordering hash and sends the others round the ring; the data
// replier answers the warps' load_iru requests with the reordered entries.
// idle_o tells the top that this partition holds no element outside its hash
// (prefetching finished, classifier queues and ring buffers empty); the AND
// of all partitions' idle_o comes back as all_inserted_i and moves the
// controller to the FLUSH phase. The ev_* outputs are one-cycle event
// strobes for performance counting. The block structure is the paper's
// (its hardware overview figure); the ports are this design's.
module iru_partition
  import iru_pkg::*;
#(
  parameter int unsigned NUM_PARTS  = 4,
  parameter int unsigned PART_ID    = 0,
  parameter int unsigned SETS       = 256,
  parameter int unsigned BANKS      = 2,
  parameter int unsigned PF_SLOTS   = 8,
  parameter int unsigned CQ_DEPTH   = 64,
  parameter int unsigned RING_DEPTH = 128,
  parameter int unsigned REQ_DEPTH  = 512,
  parameter int unsigned TIMEOUT    = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  // host configuration
  input  logic              cfg_we,
  input  logic [2:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  input  logic              all_inserted_i,
  output logic              idle_o,
  output iru_phase_e        phase_o,
  // L2 read port
  output logic              mem_req_valid,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [$clog2(PF_SLOTS):0] mem_req_tag,
  input  logic              mem_req_ready,
  input  logic              mem_rsp_valid,
  input  logic [$clog2(PF_SLOTS):0] mem_rsp_tag,
  input  logic [LINE_BITS-1:0] mem_rsp_data,
  // ring links
  input  logic              lin_valid,
  input  iru_ring_t         lin_data,
  output logic              lin_ready,
  output logic              lout_valid,
  output iru_ring_t         lout_data,
  input  logic              lout_ready,
  // SM side
  input  logic              req_valid,
  input  iru_req_t          req_data,
  output logic              req_ready,
  output logic              rsp_valid,
  output iru_rsp_t          rsp_data,
  input  logic              rsp_ready,
  // events
  output logic              ev_merge,
  output logic              ev_full_stall,
  output logic              ev_ring_insert,
  output logic              ev_forward,
  output logic              ev_inject,
  output logic              ev_rep_full,
  output logic              ev_rep_timeout,
  output logic              ev_rep_flush,
  output logic              ev_rep_empty
);
  iru_cfg_t   cfg;
  logic       start;

  iru_controller u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .all_inserted_i,
    .cfg_o(cfg), .phase_o, .start_o(start)
  );

  logic              head_valid, head_pop, pf_done;
  logic [POS_W-1:0]  head_line;
  logic [WARP-1:0][IDX_W-1:0] head_idx;
  logic [WARP-1:0][SEC_W-1:0] head_sec;
  logic [$clog2(WARP+1)-1:0]  head_cnt;

  iru_prefetcher #(.PF_SLOTS(PF_SLOTS), .NUM_PARTS(NUM_PARTS), .PART_ID(PART_ID)) u_pf (
    .clk, .rst_n, .start, .cfg,
    .mem_req_valid, .mem_req_addr, .mem_req_tag, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_tag, .mem_rsp_data,
    .head_valid, .head_line, .head_idx, .head_sec, .head_cnt, .head_pop, .done_o(pf_done)
  );

  logic      loc_valid, loc_pop, rq_valid, rq_pop, cl_idle;
  iru_elem_t loc_elem;
  iru_ring_t rq_data;

  iru_classifier #(.CQ_DEPTH(CQ_DEPTH), .NUM_PARTS(NUM_PARTS), .SETS(SETS), .PART_ID(PART_ID)) u_cl (
    .clk, .rst_n, .start, .cfg,
    .head_valid, .head_line, .head_idx, .head_sec, .head_cnt, .head_pop,
    .loc_valid, .loc_elem, .loc_pop, .rq_valid, .rq_data, .rq_pop, .idle_o(cl_idle)
  );

  logic      rin_valid, rin_pop, rout_push, ring_empty;
  iru_ring_t rin_data, rout_data;
  logic [$clog2(RING_DEPTH+1)-1:0] rout_count;

  iru_ring_node #(.RING_DEPTH(RING_DEPTH)) u_ring (
    .clk, .rst_n, .lin_valid, .lin_data, .lin_ready, .lout_valid, .lout_data, .lout_ready,
    .rin_valid, .rin_data, .rin_pop, .rout_push, .rout_data, .rout_count, .empty_o(ring_empty)
  );

  logic      ins_valid, ins_ready;
  iru_elem_t ins_elem;

  iru_data_processing #(.RING_DEPTH(RING_DEPTH), .PART_ID(PART_ID)) u_dp (
    .rin_valid, .rin_data, .rin_pop, .rout_push, .rout_data, .rout_count,
    .loc_valid, .loc_elem, .loc_pop, .rq_valid, .rq_data, .rq_pop,
    .ins_valid, .ins_elem, .ins_ready,
    .ev_ring_insert, .ev_forward, .ev_inject
  );

  logic      pop_valid, hash_empty;
  logic [$clog2(SETS)-1:0] pop_set, best_set;
  iru_elem_t pop_elem;
  logic [$clog2(WARP+1)-1:0] pop_cnt, best_cnt;

  iru_reordering_hash #(.SETS(SETS), .WAYS(WARP), .BANKS(BANKS), .NUM_PARTS(NUM_PARTS)) u_hash (
    .clk, .rst_n, .clear(start), .filter(cfg.filter), .tgt_base(cfg.tgt_base), .tgt_wlog2(cfg.tgt_wlog2),
    .ins_valid, .ins_elem, .ins_ready, .ins_merged(ev_merge), .ins_full_stall(ev_full_stall),
    .pop_valid, .pop_set, .pop_elem, .pop_cnt, .best_set, .best_cnt, .empty(hash_empty)
  );

  iru_data_replier #(.REQ_DEPTH(REQ_DEPTH), .TIMEOUT(TIMEOUT), .SETS(SETS)) u_rep (
    .clk, .rst_n, .phase(phase_o), .sec_en(cfg.sec_en),
    .req_valid, .req_data, .req_ready, .rsp_valid, .rsp_o(rsp_data), .rsp_ready,
    .pop_valid, .pop_set, .pop_elem, .pop_cnt, .best_set, .best_cnt, .hash_empty,
    .ev_full(ev_rep_full), .ev_timeout(ev_rep_timeout), .ev_flush(ev_rep_flush), .ev_empty(ev_rep_empty)
  );

  assign idle_o = pf_done && cl_idle && ring_empty && !start;
endmodule
