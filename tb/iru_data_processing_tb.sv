// iru_data_processing_tb: exhaustive random check of the routing rules of
// Data Processing (combinational): ring arrivals for this partition take the
// hash port ahead of the local queue; elements for other partitions pass
// through to the ring output ahead of injections from the ring queue; an
// injection needs two free output slots, a pass-through one; nothing is
// popped that is not taken; the event strobes match.
module iru_data_processing_tb;
  import iru_pkg::*;
  localparam int D = 8, ME = 2;
  logic rin_valid, rin_pop, rout_push, loc_valid, loc_pop, rq_valid, rq_pop, ins_valid, ins_ready;
  iru_ring_t rin_data, rout_data, rq_data;
  iru_elem_t loc_elem, ins_elem;
  logic [3:0] rout_count;
  logic ev_ri, ev_f, ev_i;
  int checks = 0, failures = 0;

  iru_data_processing #(.RING_DEPTH(D), .PART_ID(ME)) dut (.rin_valid, .rin_data, .rin_pop,
    .rout_push, .rout_data, .rout_count, .loc_valid, .loc_elem, .loc_pop, .rq_valid, .rq_data, .rq_pop,
    .ins_valid, .ins_elem, .ins_ready, .ev_ring_insert(ev_ri), .ev_forward(ev_f), .ev_inject(ev_i));

  task automatic ck(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int t = 0; t < 20000; t++) begin
      bit to_me, fwd, inj, e_ins_valid;
      rin_valid = 1'($urandom); loc_valid = 1'($urandom); rq_valid = 1'($urandom);
      ins_ready = 1'($urandom);
      rin_data = iru_ring_t'({$urandom, $urandom, $urandom});
      rin_data.dest = 8'($urandom_range(0, 3));
      rq_data = iru_ring_t'({$urandom, $urandom, $urandom});
      loc_elem = iru_elem_t'({$urandom, $urandom, $urandom});
      rout_count = 4'($urandom_range(0, D));
      #1;
      to_me = rin_valid && rin_data.dest == ME;
      fwd = rin_valid && !to_me && rout_count < D;
      inj = !(rin_valid && !to_me) && rq_valid && rout_count < D - 1;
      e_ins_valid = to_me || loc_valid;
      ck(ins_valid == e_ins_valid, "ins_valid");
      if (e_ins_valid) ck(ins_elem == (to_me ? rin_data.elem : loc_elem), "ring arrival has priority for the hash");
      ck(loc_pop == (!to_me && loc_valid && ins_ready), "local queue pop");
      ck(rin_pop == ((to_me && ins_ready) || fwd), "ring input pop");
      ck(rout_push == (fwd || inj), "ring output push");
      if (fwd) ck(rout_data == rin_data, "pass-through data");
      if (inj) ck(rout_data == rq_data, "injected data");
      ck(rq_pop == inj, "ring queue pop");
      ck(ev_ri == (to_me && ins_ready) && ev_f == fwd && ev_i == inj, "events");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
