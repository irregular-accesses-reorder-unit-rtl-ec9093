// iru_pkg: types and constants shared by the Irregular accesses Reorder Unit (IRU).
//
// The IRU reorders the indices that a GPU kernel later uses for an irregular
// load, so that the 32 indices handed to one warp target the same 128-byte
// memory block. The element format, the configuration registers and the
// filter/merge encodings used by every block are defined here.
//
// Following the paper: 24-bit indices, an optional 32-bit secondary value per
// index, the original position of each element, warps of 32 threads, 128-byte
// lines, 1024 hash sets split over 4 memory partitions, integer-compare and
// floating-point-add merging. The bit layout of the element (80 bits, which is
// what the paper's 80 KB of hash data over 256 x 32 elements works out to),
// the register map and the phase encoding are this design's own choices.
package iru_pkg;

  localparam int unsigned WARP       = 32;   // threads per warp, elements per hash entry
  localparam int unsigned IDX_W      = 24;   // index width
  localparam int unsigned SEC_W      = 32;   // secondary (attribute) width
  localparam int unsigned POS_W      = 24;   // original position in the indices array
  localparam int unsigned ADDR_W     = 32;   // byte address width
  localparam int unsigned LINE_BYTES = 128;  // L2 line / memory block
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned TAG_W      = 4;    // prefetch request tag {slot[2:0], array}
  localparam int unsigned SM_W       = 8;    // SM number in a request
  localparam int unsigned WID_W      = 8;    // warp number in a request
  localparam int unsigned TS_W       = 16;   // request arrival time stamp
  localparam int unsigned CNT_W      = $clog2(WARP + 1);

  // One element: the index that drives reordering, the secondary value that
  // travels with it and the position it had in the indices array.
  typedef struct packed {
    logic [IDX_W-1:0] idx;
    logic [SEC_W-1:0] sec;
    logic [POS_W-1:0] pos;
  } iru_elem_t;

  // An element on the ring carries the partition it is going to.
  typedef struct packed {
    logic [7:0] dest;
    iru_elem_t  elem;
  } iru_ring_t;

  typedef enum logic [1:0] {
    FILT_NONE = 2'd0,   // plain reordering, duplicates kept
    FILT_DROP = 2'd1,   // duplicate index removed, first element kept
    FILT_MIN  = 2'd2,   // duplicate merged, smaller secondary kept (integer compare)
    FILT_FADD = 2'd3    // duplicate merged, secondaries added as IEEE single floats
  } iru_filter_e;

  typedef enum logic [1:0] {
    PH_IDLE  = 2'd0,    // not configured for the running kernel
    PH_RUN   = 2'd1,    // prefetching, classifying and inserting
    PH_FLUSH = 2'd2     // all data inserted: remaining entries are merged into replies
  } iru_phase_e;

  // Configuration written by the host through configure_iru().
  typedef struct packed {
    logic [ADDR_W-1:0] tgt_base;    // base of the irregularly accessed array
    logic [2:0]        tgt_wlog2;   // log2 of its element size in bytes
    logic [ADDR_W-1:0] idx_base;    // indices array (32-bit words, 128 B aligned)
    logic [ADDR_W-1:0] sec_base;    // secondary array (32-bit words, 128 B aligned)
    logic              sec_en;      // secondary array present
    iru_filter_e       filter;      // filter / merge operation
    logic [POS_W-1:0]  num_elems;   // number of elements in the indices array
  } iru_cfg_t;

  // Register map of the host configuration port.
  localparam logic [2:0] REG_TGT_BASE = 3'd0;
  localparam logic [2:0] REG_TGT_WLOG = 3'd1;
  localparam logic [2:0] REG_IDX_BASE = 3'd2;
  localparam logic [2:0] REG_SEC_BASE = 3'd3;
  localparam logic [2:0] REG_NUM      = 3'd4;
  localparam logic [2:0] REG_FLAGS    = 3'd5;  // [0] sec_en, [2:1] filter
  localparam logic [2:0] REG_START    = 3'd6;  // write: kernel launch

  // A load_iru request from a warp.
  typedef struct packed {
    logic [SM_W-1:0]  sm;
    logic [WID_W-1:0] warp;
  } iru_req_t;

  // One lane of a reply beat. Beat 0 carries {index, position}; beat 1, sent
  // only when a secondary array is configured, carries the secondary value.
  typedef struct packed {
    logic        valid;
    logic [47:0] data;
  } iru_lane_t;

  typedef struct packed {
    iru_req_t             req;
    logic                 beat;
    logic                 last;
    iru_lane_t [WARP-1:0] lane;
  } iru_rsp_t;

endpackage
