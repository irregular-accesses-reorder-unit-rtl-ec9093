// iru_data_replier: answers the load_iru requests of the warps with
// reordered elements taken from the reordering hash.
//
// Requests {SM, warp} are queued with their arrival time in a REQ_DEPTH-deep
// request buffer (512 x 32 bits = the paper's 2 KB) and served oldest first:
//  * as soon as the hash holds a full entry (32 elements), that entry is
//    moved into the reply buffer and removed from the hash;
//  * once the oldest request has waited TIMEOUT cycles, or when all data has
//    been inserted (phase FLUSH), the fullest entry is taken instead, then
//    the next fullest, until 32 elements are gathered. Without FLUSH the
//    replier waits for more data when the hash runs dry; in FLUSH it sends
//    what it has, and a request that finds the hash empty gets a reply with
//    every lane marked invalid, so filtered-out threads end up together in
//    whole warps.
// Elements move from the hash at one per cycle (top of the locked entry
// first). The reply is one beat of 32 lanes carrying {index, position} and,
// when a secondary array is configured, a second beat carrying the secondary
// values (rsp_o.last marks the final beat). Lanes without an element have
// valid = 0. The reply port is valid/ready and holds its beat until taken.
// The policy (full entry first, timeout, merge of the remaining entries at
// the end, at most two replies, invalid lanes for filtered threads) follows
// the paper; the request format, the timeout value, the one-element-per-cycle
// transfer and "fullest entry" as the measure of best coalescing are this
// design's choices.
module iru_data_replier
  import iru_pkg::*;
#(
  parameter int unsigned REQ_DEPTH = 512,
  parameter int unsigned TIMEOUT   = 512,
  parameter int unsigned SETS      = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  iru_phase_e  phase,
  input  logic        sec_en,
  // requests from the SMs
  input  logic        req_valid,
  input  iru_req_t    req_data,
  output logic        req_ready,
  // replies to the SMs
  output logic        rsp_valid,
  output iru_rsp_t    rsp_o,
  input  logic        rsp_ready,
  // reordering hash
  output logic        pop_valid,
  output logic [$clog2(SETS)-1:0] pop_set,
  input  iru_elem_t   pop_elem,
  input  logic [$clog2(WARP+1)-1:0] pop_cnt,
  input  logic [$clog2(SETS)-1:0] best_set,
  input  logic [$clog2(WARP+1)-1:0] best_cnt,
  input  logic        hash_empty,
  // event strobes (one per reply)
  output logic        ev_full,        // served by a full entry
  output logic        ev_timeout,     // served after the timeout
  output logic        ev_flush,       // served while merging the remaining entries
  output logic        ev_empty        // all lanes invalid
);
  localparam int unsigned CW = $clog2(WARP + 1);
  localparam int unsigned WW = $clog2(WARP);

  typedef enum logic [1:0] {S_IDLE, S_GATHER, S_SEND0, S_SEND1} state_e;
  typedef enum logic [1:0] {M_FULL, M_TIMEOUT, M_FLUSH} mode_e;

  typedef struct packed {
    iru_req_t        req;
    logic [TS_W-1:0] ts;
  } req_entry_t;

  state_e          state;
  mode_e           mode;
  logic [TS_W-1:0] now;
  logic            timed_out;
  logic [CW-1:0]   k;
  logic [SETS > 1 ? $clog2(SETS)-1 : 0:0] locked;
  iru_elem_t       buf_e [WARP];

  req_entry_t      head;
  logic            q_empty, q_full, q_pop;
  logic [$clog2(REQ_DEPTH+1)-1:0] q_count;

  iru_fifo #(.WIDTH($bits(req_entry_t)), .DEPTH(REQ_DEPTH)) u_req (
    .clk, .rst_n, .push(req_valid && req_ready), .din({req_data, now}), .pop(q_pop),
    .dout(head), .empty(q_empty), .full(q_full), .count(q_count)
  );
  assign req_ready = !q_full;

  logic [TS_W-1:0] age;
  logic            expired;
  assign age     = now - head.ts;
  assign expired = timed_out || (age >= TS_W'(TIMEOUT));

  assign pop_set   = locked;
  assign pop_valid = (state == S_GATHER) && (pop_cnt != 0) && (k < CW'(WARP));

  always_comb begin
    rsp_o      = '0;
    rsp_o.req  = head.req;
    rsp_o.beat = (state == S_SEND1);
    rsp_o.last = (state == S_SEND1) || !sec_en;
    for (int l = 0; l < WARP; l++) begin
      rsp_o.lane[l].valid = (CW'(l) < k);
      rsp_o.lane[l].data  = (state == S_SEND1) ? 48'(buf_e[l].sec) : {buf_e[l].idx, buf_e[l].pos};
    end
    rsp_valid = (state == S_SEND0) || (state == S_SEND1);
    q_pop     = rsp_valid && rsp_ready && rsp_o.last;
  end

  always_ff @(posedge clk) begin
    if (pop_valid) buf_e[WW'(k)] <= pop_elem;
  end

  always_ff @(posedge clk) begin
    ev_full <= 1'b0; ev_timeout <= 1'b0; ev_flush <= 1'b0; ev_empty <= 1'b0;
    if (!rst_n) begin
      state     <= S_IDLE;
      mode      <= M_FULL;
      now       <= '0;
      timed_out <= 1'b0;
      k         <= '0;
      locked    <= '0;
    end else begin
      now <= now + 1'b1;
      if (!q_empty && expired) timed_out <= 1'b1;
      unique case (state)
        S_IDLE: begin
          k <= '0;
          if (!q_empty && phase != PH_IDLE) begin
            if (best_cnt == CW'(WARP)) begin
              mode <= M_FULL; locked <= best_set; state <= S_GATHER;
            end else if (phase == PH_FLUSH) begin
              mode <= M_FLUSH; locked <= best_set;
              state <= hash_empty ? S_SEND0 : S_GATHER;
            end else if (expired) begin
              mode <= M_TIMEOUT; locked <= best_set; state <= S_GATHER;
            end
          end
        end
        S_GATHER: begin
          if (pop_valid) k <= k + 1'b1;
          if (pop_valid && k == CW'(WARP - 1)) begin
            state <= S_SEND0;
          end else if (pop_cnt == 0 || (pop_valid && pop_cnt == 1)) begin
            // locked entry used up: take the next fullest one
            if (!pop_valid) locked <= best_set;
            if (phase == PH_FLUSH && hash_empty) begin
              state <= S_SEND0;
              if (mode == M_TIMEOUT) mode <= M_FLUSH;
            end
          end
        end
        S_SEND0: begin
          if (rsp_ready) begin
            state <= sec_en ? S_SEND1 : S_IDLE;
            if (!sec_en) begin
              timed_out <= 1'b0;
              ev_full    <= (mode == M_FULL);
              ev_timeout <= (mode == M_TIMEOUT);
              ev_flush   <= (mode == M_FLUSH);
              ev_empty   <= (k == 0);
            end
          end
        end
        S_SEND1: begin
          if (rsp_ready) begin
            state      <= S_IDLE;
            timed_out  <= 1'b0;
            ev_full    <= (mode == M_FULL);
            ev_timeout <= (mode == M_TIMEOUT);
            ev_flush   <= (mode == M_FLUSH);
            ev_empty   <= (k == 0);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_o));
endmodule
