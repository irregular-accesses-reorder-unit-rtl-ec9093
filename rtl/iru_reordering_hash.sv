// iru_reordering_hash: this partition's slice of the IRU's logical hash table.
//
// A direct-mapped table of SETS entries, each holding up to WAYS (32)
// elements. The set of an element is computed from its index by iru_hash_fn,
// so the elements that will touch the same memory block gather in one entry.
// There is no tag: an element is appended to its entry even when the entry
// already holds elements of another block, as the paper prescribes to keep
// the hardware simple. A full entry accepts nothing more (ins_ready low) until
// the Data Replier empties it.
//
// Insertion (one per cycle): the entry's valid elements are compared with the
// inserted index. With a filter operation configured and a duplicate found,
// the element is merged into the stored one by iru_merge_unit (drop, integer
// min or float add) and the entry does not grow; otherwise it is written at
// position count and count increments. Both take effect at the next clock.
//
// Removal: the replier names a set (pop_set) and sees its top element
// (pop_elem) and count (pop_cnt) combinationally; pop_valid removes that
// element at the clock edge. best_set/best_cnt name the entry holding the
// most elements (lowest set number on a tie), the replier's choice of "best
// coalesced" entry.
//
// The table is split in BANKS banks on the low set bits (the paper's 2-way
// banking). Each bank serves one access per cycle: an insertion into the bank
// that is being popped waits. clear empties the table (kernel start).
// Sizes follow the paper (256 sets per partition, 32 elements per entry, 2
// banks); the storage is modelled as a register array with whole-row read,
// where a chip would use SRAM macros of the same organisation.
module iru_reordering_hash
  import iru_pkg::*;
#(
  parameter int unsigned SETS      = 256,
  parameter int unsigned WAYS      = WARP,
  parameter int unsigned BANKS     = 2,
  parameter int unsigned NUM_PARTS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  iru_filter_e       filter,
  input  logic [ADDR_W-1:0] tgt_base,
  input  logic [2:0]        tgt_wlog2,
  // insertion
  input  logic              ins_valid,
  input  iru_elem_t         ins_elem,
  output logic              ins_ready,
  output logic              ins_merged,     // this insertion is merged (filtered)
  output logic              ins_full_stall, // insertion held back by a full entry
  // removal
  input  logic              pop_valid,
  input  logic [$clog2(SETS)-1:0] pop_set,
  output iru_elem_t         pop_elem,
  output logic [$clog2(WAYS+1)-1:0] pop_cnt,
  // status
  output logic [$clog2(SETS)-1:0] best_set,
  output logic [$clog2(WAYS+1)-1:0] best_cnt,
  output logic              empty
);
  localparam int unsigned SW  = $clog2(SETS);
  localparam int unsigned CW  = $clog2(WAYS + 1);
  localparam int unsigned WW  = $clog2(WAYS);
  localparam int unsigned BKW = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned OW  = $clog2(SETS * WAYS + 1);

  iru_elem_t       data [SETS][WAYS];
  logic [CW-1:0]   cnt  [SETS];
  logic [OW-1:0]   occupancy;

  logic [7:0]      ins_part;
  logic [SW-1:0]   ins_set;
  logic            dup_hit;
  logic [WW-1:0]   dup_way;
  logic [SEC_W-1:0] merged_sec;
  logic            bank_conflict, ins_fire, grows;

  iru_hash_fn #(.NUM_SETS_G(SETS * NUM_PARTS), .NUM_PARTS(NUM_PARTS)) u_hash (
    .idx(ins_elem.idx), .tgt_base(tgt_base), .tgt_wlog2(tgt_wlog2),
    .part(ins_part), .lset(ins_set)
  );

  // duplicate search over the valid part of the entry
  always_comb begin
    dup_hit = 1'b0;
    dup_way = '0;
    if (filter != FILT_NONE) begin
      for (int w = WAYS - 1; w >= 0; w--) begin
        if (CW'(w) < cnt[ins_set] && data[ins_set][w].idx == ins_elem.idx) begin
          dup_hit = 1'b1;
          dup_way = WW'(w);
        end
      end
    end
  end

  iru_merge_unit u_merge (
    .op(filter), .old_sec(data[ins_set][dup_way].sec), .new_sec(ins_elem.sec), .merged(merged_sec)
  );

  always_comb begin
    bank_conflict = 1'b0;
    if (BANKS > 1) bank_conflict = pop_valid && (pop_set[BKW-1:0] == ins_set[BKW-1:0]);
    else           bank_conflict = pop_valid;
    ins_full_stall = ins_valid && !dup_hit && (cnt[ins_set] == CW'(WAYS));
    ins_ready  = !bank_conflict && !ins_full_stall;
    ins_fire   = ins_valid && ins_ready;
    ins_merged = ins_fire && dup_hit;
    grows      = ins_fire && !dup_hit;
  end

  assign pop_cnt  = cnt[pop_set];
  assign pop_elem = data[pop_set][(pop_cnt == 0) ? '0 : WW'(pop_cnt - 1'b1)];
  assign empty    = (occupancy == 0);

  // fullest entry
  always_comb begin
    best_set = '0;
    best_cnt = cnt[0];
    for (int s = 1; s < SETS; s++) begin
      if (cnt[s] > best_cnt) begin
        best_cnt = cnt[s];
        best_set = SW'(s);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (grows) data[ins_set][WW'(cnt[ins_set])] <= ins_elem;
    else if (ins_merged) data[ins_set][dup_way].sec <= merged_sec;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int s = 0; s < SETS; s++) cnt[s] <= '0;
      occupancy <= '0;
    end else begin
      if (grows) cnt[ins_set] <= cnt[ins_set] + 1'b1;
      if (pop_valid && pop_cnt != 0) cnt[pop_set] <= cnt[pop_set] - 1'b1;
      occupancy <= occupancy + OW'(grows) - OW'(pop_valid && pop_cnt != 0);
    end
  end

  // an element must belong to this partition's slice (checked by the caller's routing)
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop_valid |-> pop_cnt != 0);
  a_same_set:     assert property (@(posedge clk) disable iff (!rst_n)
                                   !(grows && pop_valid && pop_set == ins_set));
endmodule
