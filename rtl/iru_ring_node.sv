// iru_ring_node: one stop of the ring that joins the IRU partitions.
//
// The logical hash table is split over the partitions, so an element fetched
// in one partition may belong to another. The ring moves such elements one
// hop per cycle in one direction (partition i to i+1 mod N). A node has an
// input buffer fed by the link from the previous partition and an output
// buffer draining into the link to the next one, each RING_DEPTH elements of
// 88 bits (2 x 128 x 88 bits = 2.75 KB, against the paper's 2.8 KB of ring
// buffering). The links are valid/ready: lin_ready is high while the input
// buffer has room, lout_valid while the output buffer holds an element. The
// local side (Data Processing) reads the input buffer head and writes the
// output buffer. The paper gives a ring between the IRUs that sends and
// receives an element per cycle; the single direction and the depths are
// this design's choices.
module iru_ring_node
  import iru_pkg::*;
#(
  parameter int unsigned RING_DEPTH = 128
) (
  input  logic      clk,
  input  logic      rst_n,
  // link from the previous partition
  input  logic      lin_valid,
  input  iru_ring_t lin_data,
  output logic      lin_ready,
  // link to the next partition
  output logic      lout_valid,
  output iru_ring_t lout_data,
  input  logic      lout_ready,
  // local side
  output logic      rin_valid,
  output iru_ring_t rin_data,
  input  logic      rin_pop,
  input  logic      rout_push,
  input  iru_ring_t rout_data,
  output logic [$clog2(RING_DEPTH+1)-1:0] rout_count,
  output logic      empty_o
);
  logic in_empty, in_full, out_empty, out_full;
  logic [$clog2(RING_DEPTH+1)-1:0] in_count;

  iru_fifo #(.WIDTH($bits(iru_ring_t)), .DEPTH(RING_DEPTH)) u_in (
    .clk, .rst_n, .push(lin_valid && lin_ready), .din(lin_data), .pop(rin_pop),
    .dout(rin_data), .empty(in_empty), .full(in_full), .count(in_count)
  );
  iru_fifo #(.WIDTH($bits(iru_ring_t)), .DEPTH(RING_DEPTH)) u_out (
    .clk, .rst_n, .push(rout_push), .din(rout_data), .pop(lout_valid && lout_ready),
    .dout(lout_data), .empty(out_empty), .full(out_full), .count(rout_count)
  );

  assign lin_ready  = !in_full;
  assign rin_valid  = !in_empty;
  assign lout_valid = !out_empty;
  assign empty_o    = in_empty && out_empty;

  a_lout_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  lout_valid && !lout_ready |=> lout_valid && $stable(lout_data));
endmodule
