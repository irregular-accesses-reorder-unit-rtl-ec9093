// iru_ring_node_tb: a ring stop is fed on its link input and its local output
// side with random traffic and random back-pressure; the test checks that
// both buffers deliver every element in order, that a full input buffer
// drops lin_ready (back-pressure happened), that one element per cycle passes
// when both sides are ready, and that empty_o is high only when both buffers
// are empty.
module iru_ring_node_tb;
  import iru_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lin_valid, lin_ready, lout_valid, lout_ready, rin_valid, rin_pop, rout_push, empty;
  iru_ring_t lin_data, lout_data, rin_data, rout_data;
  logic [$clog2(D+1)-1:0] rout_count;
  int checks = 0, failures = 0, bp = 0;
  iru_ring_t q_in[$], q_out[$];
  int n_in = 0, n_out = 0, t_full_rate = 0;
  bit fast;

  iru_ring_node #(.RING_DEPTH(D)) dut (.clk, .rst_n, .lin_valid, .lin_data, .lin_ready,
    .lout_valid, .lout_data, .lout_ready, .rin_valid, .rin_data, .rin_pop,
    .rout_push, .rout_data, .rout_count, .empty_o(empty));

  task automatic ck(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  always @(negedge clk) begin
    if (rst_n) begin
      ck(empty == (!rin_valid && !lout_valid), "empty flag");
      lin_valid  = fast || ($urandom_range(99) < 60);
      lin_data   = iru_ring_t'({$urandom, $urandom, $urandom});
      lout_ready = fast || ($urandom_range(99) < 40);
      rin_pop    = rin_valid && (fast || $urandom_range(99) < 40);
      rout_push  = (rout_count < D) && (fast || $urandom_range(99) < 60);
      rout_data  = iru_ring_t'({$urandom, $urandom, $urandom});
    end
  end
  always @(posedge clk) begin
    if (rst_n) begin
      if (lin_valid && !lin_ready) bp++;
      if (lin_valid && lin_ready) q_in.push_back(lin_data);
      if (rin_pop) begin ck(q_in.size() > 0 && rin_data == q_in.pop_front(), "input buffer order"); n_in++; end
      if (rout_push) q_out.push_back(rout_data);
      if (lout_valid && lout_ready) begin ck(q_out.size() > 0 && lout_data == q_out.pop_front(), "output buffer order"); n_out++; end
    end
  end

  initial begin
    lin_valid = 0; lout_ready = 0; rin_pop = 0; rout_push = 0; fast = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3000) @(posedge clk);
    ck(bp > 0, "link back-pressure seen");
    ck(n_in > 500 && n_out > 500, "traffic flowed");
    fast = 1;
    repeat (20) @(posedge clk);
    begin
      int a, b;
      a = n_in; b = n_out;
      repeat (100) @(posedge clk);
      ck(n_in - a == 100 && n_out - b == 100, "one element per cycle each way");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
