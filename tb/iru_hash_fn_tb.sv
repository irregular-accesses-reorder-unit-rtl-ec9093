// iru_hash_fn_tb: checks the IRU hashing function against an independent
// model (address, 128-byte block, XOR fold of the block number in 10-bit
// chunks, partition = set mod 4, local set = set div 4) on random indices,
// bases and element sizes, and checks that indices of one memory block
// always land in the same set.
module iru_hash_fn_tb;
  import iru_pkg::*;
  logic [IDX_W-1:0]  idx;
  logic [ADDR_W-1:0] base;
  logic [2:0]        wlog2;
  logic [7:0]        part;
  logic [7:0]        lset;
  int checks = 0, failures = 0;

  iru_hash_fn dut (.idx, .tgt_base(base), .tgt_wlog2(wlog2), .part, .lset);

  function automatic int ref_set(input logic [23:0] i, input logic [31:0] b, input int w);
    longint unsigned a = (longint'(b) + (longint'(i) << w)) & 64'hffff_ffff;
    longint unsigned blk = a >> 7;
    int g = 0;
    while (blk != 0) begin
      g = g ^ int'(blk & 64'h3ff);
      blk = blk >> 10;
    end
    return g;
  endfunction

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int g;
      idx = 24'($urandom); base = $urandom & 32'hffff_ff80; wlog2 = 3'($urandom_range(0, 3));
      #1;
      g = ref_set(idx, base, int'(wlog2));
      checks++;
      if (part != 8'(g % 4) || lset != 8'(g / 4)) begin
        failures++;
        if (failures < 10) $display("FAIL idx=%h base=%h w=%0d: got %0d/%0d exp %0d/%0d", idx, base, wlog2, part, lset, g % 4, g / 4);
      end
      // a neighbour in the same block shares the set
      begin
        logic [7:0] p0, l0;
        int per;
        p0 = part; l0 = lset; per = 128 >> wlog2;
        idx = (idx / 24'(per)) * 24'(per) + 24'($urandom_range(0, per - 1));
        #1;
        checks++;
        if (part != p0 || lset != l0) failures++;
      end
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
