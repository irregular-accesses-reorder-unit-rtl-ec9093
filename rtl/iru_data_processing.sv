// iru_data_processing: routes elements between the Classifier queues, the
// ring and the local reordering hash.
//
// Every cycle one element may be inserted into the hash and one may enter
// the ring's output buffer. For the hash port, an element arriving on the
// ring for this partition has priority over the Classifier's local queue, as
// the paper prescribes. For the ring output, elements passing through to a
// further partition have priority over elements injected from the
// Classifier's ring queue, and an injection needs two free output slots. The
// last rule keeps one slot of the ring free, so the ring cannot fill up with
// elements that all wait for each other. The priorities on the ring output
// and the injection rule are this design's choices.
module iru_data_processing
  import iru_pkg::*;
#(
  parameter int unsigned RING_DEPTH = 128,
  parameter int unsigned PART_ID    = 0
) (
  // ring input buffer head
  input  logic      rin_valid,
  input  iru_ring_t rin_data,
  output logic      rin_pop,
  // ring output buffer
  output logic      rout_push,
  output iru_ring_t rout_data,
  input  logic [$clog2(RING_DEPTH+1)-1:0] rout_count,
  // classifier queues
  input  logic      loc_valid,
  input  iru_elem_t loc_elem,
  output logic      loc_pop,
  input  logic      rq_valid,
  input  iru_ring_t rq_data,
  output logic      rq_pop,
  // hash insertion
  output logic      ins_valid,
  output iru_elem_t ins_elem,
  input  logic      ins_ready,
  // event strobes
  output logic      ev_ring_insert,   // element from the ring inserted here
  output logic      ev_forward,       // element passed through to the next partition
  output logic      ev_inject         // element of this partition sent on the ring
);
  logic to_me, rout_free1, rout_free2;

  always_comb begin
    to_me      = rin_valid && (rin_data.dest == 8'(PART_ID));
    rout_free1 = rout_count < ($clog2(RING_DEPTH+1))'(RING_DEPTH);
    rout_free2 = rout_count < ($clog2(RING_DEPTH+1))'(RING_DEPTH - 1);

    ins_valid = to_me || loc_valid;
    ins_elem  = to_me ? rin_data.elem : loc_elem;
    loc_pop   = !to_me && loc_valid && ins_ready;

    rout_push = 1'b0;
    rout_data = rq_data;
    rq_pop    = 1'b0;
    rin_pop   = to_me && ins_ready;
    ev_forward = 1'b0;
    ev_inject  = 1'b0;
    if (rin_valid && !to_me) begin
      if (rout_free1) begin
        rout_push  = 1'b1;
        rout_data  = rin_data;
        rin_pop    = 1'b1;
        ev_forward = 1'b1;
      end
    end else if (rq_valid && rout_free2) begin
      rout_push = 1'b1;
      rq_pop    = 1'b1;
      ev_inject = 1'b1;
    end
    ev_ring_insert = to_me && ins_ready;
  end
endmodule
