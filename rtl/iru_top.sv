// iru_top: the Irregular accesses Reorder Unit of a whole GPU.
//
// NUM_PARTS IRU partitions, one per memory partition, share one logical
// hash table of NUM_PARTS x SETS sets: each partition prefetches the part
// of the indices array stored in its own memory partition and the ring
// (partition i feeds partition i+1 mod NUM_PARTS) carries every element to
// the partition that owns its hash set. The host configuration port is
// broadcast to all partitions. The top ANDs the partitions' idle flags into
// the "all data inserted" signal that starts the final merge of the
// remaining entries. Each partition keeps its own L2 read port and its own
// SM request/reply port, which the GPU's interconnect connects; ports are
// arrays indexed by partition. The event strobes of all partitions are
// brought out for counting. Four partitions and 256 sets each follow the
// paper's evaluated GTX 980 configuration.
module iru_top
  import iru_pkg::*;
#(
  parameter int unsigned NUM_PARTS  = 4,
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
  input  logic              cfg_we,
  input  logic [2:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output iru_phase_e        phase_o,
  // L2 read ports, one per memory partition
  output logic [NUM_PARTS-1:0]                    mem_req_valid,
  output logic [NUM_PARTS-1:0][ADDR_W-1:0]        mem_req_addr,
  output logic [NUM_PARTS-1:0][$clog2(PF_SLOTS):0] mem_req_tag,
  input  logic [NUM_PARTS-1:0]                    mem_req_ready,
  input  logic [NUM_PARTS-1:0]                    mem_rsp_valid,
  input  logic [NUM_PARTS-1:0][$clog2(PF_SLOTS):0] mem_rsp_tag,
  input  logic [NUM_PARTS-1:0][LINE_BITS-1:0]     mem_rsp_data,
  // SM request / reply ports, one per memory partition
  input  logic [NUM_PARTS-1:0]                    req_valid,
  input  iru_req_t [NUM_PARTS-1:0]                req_data,
  output logic [NUM_PARTS-1:0]                    req_ready,
  output logic [NUM_PARTS-1:0]                    rsp_valid,
  output iru_rsp_t [NUM_PARTS-1:0]                rsp_data,
  input  logic [NUM_PARTS-1:0]                    rsp_ready,
  // event strobes per partition
  output logic [NUM_PARTS-1:0] ev_merge,
  output logic [NUM_PARTS-1:0] ev_full_stall,
  output logic [NUM_PARTS-1:0] ev_ring_insert,
  output logic [NUM_PARTS-1:0] ev_forward,
  output logic [NUM_PARTS-1:0] ev_inject,
  output logic [NUM_PARTS-1:0] ev_rep_full,
  output logic [NUM_PARTS-1:0] ev_rep_timeout,
  output logic [NUM_PARTS-1:0] ev_rep_flush,
  output logic [NUM_PARTS-1:0] ev_rep_empty
);
  logic [NUM_PARTS-1:0] idle;
  iru_phase_e           phase [NUM_PARTS];
  logic                 all_inserted;
  logic [NUM_PARTS-1:0] lv, lr;
  iru_ring_t            ld [NUM_PARTS];

  assign all_inserted = &idle;
  assign phase_o      = phase[0];

  for (genvar p = 0; p < NUM_PARTS; p++) begin : g_part
    localparam int unsigned PREV = (p + NUM_PARTS - 1) % NUM_PARTS;
    iru_partition #(
      .NUM_PARTS(NUM_PARTS), .PART_ID(p), .SETS(SETS), .BANKS(BANKS), .PF_SLOTS(PF_SLOTS),
      .CQ_DEPTH(CQ_DEPTH), .RING_DEPTH(RING_DEPTH), .REQ_DEPTH(REQ_DEPTH), .TIMEOUT(TIMEOUT)
    ) u_iru (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
      .all_inserted_i(all_inserted), .idle_o(idle[p]), .phase_o(phase[p]),
      .mem_req_valid(mem_req_valid[p]), .mem_req_addr(mem_req_addr[p]), .mem_req_tag(mem_req_tag[p]),
      .mem_req_ready(mem_req_ready[p]), .mem_rsp_valid(mem_rsp_valid[p]), .mem_rsp_tag(mem_rsp_tag[p]),
      .mem_rsp_data(mem_rsp_data[p]),
      .lin_valid(lv[PREV]), .lin_data(ld[PREV]), .lin_ready(lr[PREV]),
      .lout_valid(lv[p]), .lout_data(ld[p]), .lout_ready(lr[p]),
      .req_valid(req_valid[p]), .req_data(req_data[p]), .req_ready(req_ready[p]),
      .rsp_valid(rsp_valid[p]), .rsp_data(rsp_data[p]), .rsp_ready(rsp_ready[p]),
      .ev_merge(ev_merge[p]), .ev_full_stall(ev_full_stall[p]), .ev_ring_insert(ev_ring_insert[p]),
      .ev_forward(ev_forward[p]), .ev_inject(ev_inject[p]), .ev_rep_full(ev_rep_full[p]),
      .ev_rep_timeout(ev_rep_timeout[p]), .ev_rep_flush(ev_rep_flush[p]), .ev_rep_empty(ev_rep_empty[p])
    );
  end
endmodule
