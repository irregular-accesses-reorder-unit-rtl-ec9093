// iru_hash_fn: hashing function of the reordering hash (combinational).
//
// An element is placed by the memory block its index will touch in the
// irregular access: address = tgt_base + (idx << tgt_wlog2), block =
// address / 128. The block number is XOR-folded into a set of the global
// logical hash table (1024 sets). The set's low bits pick the IRU partition
// that owns it and the remaining bits the set inside that partition, so all
// indices of one block meet in one entry of one partition.
//
// The table sizes (1024 sets, 4 partitions, 128 B blocks) are the paper's;
// the paper asks only for "a good dispersion hash function", so the XOR fold
// and the choice of low bits for the partition are this design's.
module iru_hash_fn
  import iru_pkg::*;
#(
  parameter int unsigned NUM_SETS_G = 1024,
  parameter int unsigned NUM_PARTS  = 4
) (
  input  logic [IDX_W-1:0]  idx,
  input  logic [ADDR_W-1:0] tgt_base,
  input  logic [2:0]        tgt_wlog2,
  output logic [7:0]        part,
  output logic [$clog2(NUM_SETS_G/NUM_PARTS)-1:0] lset
);
  localparam int unsigned GW  = $clog2(NUM_SETS_G);
  localparam int unsigned PBW = (NUM_PARTS > 1) ? $clog2(NUM_PARTS) : 1;
  localparam int unsigned BW  = ADDR_W - $clog2(LINE_BYTES);

  logic [ADDR_W-1:0] addr;   // low 7 bits (offset inside the block) are not needed
  logic [BW-1:0]     blk;
  logic [GW-1:0]     gset;

  always_comb begin
    addr = tgt_base + (ADDR_W'(idx) << tgt_wlog2);
    blk  = addr[ADDR_W-1:$clog2(LINE_BYTES)];
    gset = '0;
    for (int b = 0; b < BW; b += GW) begin
      for (int k = 0; k < GW; k++) begin
        if (b + k < BW) gset[k] = gset[k] ^ blk[b+k];
      end
    end
    part = '0;
    if (NUM_PARTS > 1) part[PBW-1:0] = gset[PBW-1:0];
    lset = $bits(lset)'(gset >> ((NUM_PARTS > 1) ? PBW : 0));
  end
endmodule
