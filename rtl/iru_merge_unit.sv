// iru_merge_unit: merge operation applied when an inserted element meets an
// element with the same index in its hash entry (combinational).
//
// FILT_DROP keeps the element already stored, FILT_MIN keeps the smaller
// secondary value (unsigned integer compare, e.g. an SSSP distance) and
// FILT_FADD adds the two secondary values as IEEE-754 single-precision floats
// (e.g. PageRank contributions). The paper names integer comparison and
// floating-point addition; the unsigned compare, round-to-nearest-even, and
// flushing of subnormal inputs and results to zero are this design's choices.
// Infinity plus a finite value gives that infinity; a NaN or +inf + -inf gives
// the quiet NaN 0x7fc00000.
module iru_merge_unit
  import iru_pkg::*;
(
  input  iru_filter_e      op,
  input  logic [SEC_W-1:0] old_sec,   // value stored in the entry
  input  logic [SEC_W-1:0] new_sec,   // value being inserted
  output logic [SEC_W-1:0] merged
);
  logic [31:0] fsum;

  always_comb begin
    unique case (op)
      FILT_MIN:  merged = (new_sec < old_sec) ? new_sec : old_sec;
      FILT_FADD: merged = fsum;
      default:   merged = old_sec;
    endcase
  end

  // ---------------- single-precision adder ----------------
  logic        sa, sb, sl, ss, sr;
  logic [7:0]  ea, eb, el, es, d;
  logic [23:0] ma, mb, ml, msm;
  logic [26:0] al, as_, sum;       // 24-bit mantissa + guard, round, sticky
  logic [27:0] raw, shl;
  logic [4:0]  lz;
  logic [9:0]  er;
  logic [24:0] rnd;
  logic        g, r, st, inc, a_nan, b_nan, a_inf, b_inf;
  logic [26:0] shifted;

  always_comb begin
    sa = old_sec[31]; ea = old_sec[30:23];
    sb = new_sec[31]; eb = new_sec[30:23];
    ma = (ea == 0) ? 24'd0 : {1'b1, old_sec[22:0]};
    mb = (eb == 0) ? 24'd0 : {1'b1, new_sec[22:0]};
    a_nan = (ea == 8'hff) && (old_sec[22:0] != 0);
    b_nan = (eb == 8'hff) && (new_sec[22:0] != 0);
    a_inf = (ea == 8'hff) && (old_sec[22:0] == 0);
    b_inf = (eb == 8'hff) && (new_sec[22:0] == 0);
    // order by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; msm = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; msm = ma;
    end
    d  = el - es;
    al = {ml, 3'b000};
    as_ = {msm, 3'b000};
    shifted = '0;
    if (d >= 8'd27) begin
      shifted = {26'd0, (msm != 0)};
    end else begin
      shifted = as_ >> d;
      for (int k = 0; k < 27; k++) begin
        if (k < int'(d) && as_[k]) shifted[0] = 1'b1;
      end
    end
    if (sl == ss) raw = {1'b0, al} + {1'b0, shifted};
    else          raw = {1'b0, al} - {1'b0, shifted};
    sr = sl;
    // normalise
    lz = 5'd0;
    for (int k = 27; k >= 0; k--) begin
      if (raw[k]) begin
        lz = 5'(27 - k);
        break;
      end
    end
    er  = 10'(el) + 10'd1 - 10'(lz);
    sum = 27'((raw << lz) >> 1);          // leading one now at bit 26
    if (raw == 0) sum = '0;
    g   = sum[2];
    r   = sum[1];
    shl = raw << lz;
    st  = sum[0] | shl[0];
    inc = g & (r | st | sum[3]);
    rnd = {1'b0, sum[26:3]} + 25'(inc);
    if (rnd[24]) begin
      rnd = rnd >> 1;
      er  = er + 1'b1;
    end
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) fsum = 32'h7fc0_0000;
    else if (a_inf)                                      fsum = old_sec;
    else if (b_inf)                                      fsum = new_sec;
    else if (raw == 0)                                   fsum = 32'h0000_0000;
    else if ($signed(er) <= 0)                           fsum = {sr, 31'd0};
    else if (er >= 10'd255)                              fsum = {sr, 8'hff, 23'd0};
    else                                                 fsum = {sr, er[7:0], rnd[22:0]};
  end
endmodule
