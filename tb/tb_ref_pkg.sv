// tb_ref_pkg: reference models used by the testbenches.
//
// These are written independently of the RTL: supported quartet values are
// listed explicitly per alphabet set instead of being derived from the odd
// part, products are formed with '*', and the activation reference is a
// direct integer transcription of the PLAN segments.
package tb_ref_pkg;

  // Quartet values an alphabet set {1}, {1,3}, {1,3,5,7} or all 8 covers.
  function automatic bit ref_supported(input int v, input int na);
    case (na)
      1:       return v inside {0, 1, 2, 4, 8};
      2:       return v inside {0, 1, 2, 4, 8, 3, 6, 12};
      4:       return v inside {0, 1, 2, 4, 8, 3, 6, 12, 5, 10, 7, 14};
      default: return (v >= 0 && v < 16);
    endcase
  endfunction

  // Random weight of wt_w bits whose quartets are all supported.
  // With probability 1/small_div the upper quartets may be nonzero.
  function automatic int rand_supported_weight(input int wt_w, input int na, input int small_div);
    int nq, mag, bits, v;
    nq  = (wt_w - 1 + 3) / 4;
    mag = 0;
    for (int q = 0; q < nq; q++) begin
      bits = ((wt_w - 1) - 4 * q > 4) ? 4 : (wt_w - 1) - 4 * q;
      if (q > 0 && ($urandom % small_div) != 0) v = 0;
      else begin
        do v = $urandom % (1 << bits); while (!ref_supported(v, na));
      end
      mag = mag | (v << (4 * q));
    end
    return ($urandom % 2) ? -mag : mag;
  endfunction

  // Reference of the weight rounding: nearest supported quartet value
  // (midpoint rounds up), least significant quartet first, carry on 16,
  // saturation on overflow of the top quartet.
  function automatic int ref_constrain(input int w, input int wt_w, input int na);
    int nq, mag, res, carry, bits, top, v, best, sat, m;
    bit neg;
    neg = (w < 0);
    mag = neg ? -w : w;
    if (mag > (1 << (wt_w - 1)) - 1) mag = (1 << (wt_w - 1)) - 1;
    nq = (wt_w - 1 + 3) / 4;
    res = 0; carry = 0; sat = 0;
    for (int q = 0; q < nq; q++) begin
      bits = ((wt_w - 1) - 4 * q > 4) ? 4 : (wt_w - 1) - 4 * q;
      top  = 1 << bits;
      v    = ((mag >> (4 * q)) & (top - 1)) + carry;
      // candidates: supported values below top, and top itself (a carry)
      best = top;
      for (int c = 0; c <= top; c++) begin
        if (c < top && !ref_supported(c, na)) continue;
        // nearest; on a tie the larger candidate wins
        if ((c > v ? c - v : v - c) < (best > v ? best - v : v - best)) best = c;
        else if ((c > v ? c - v : v - c) == (best > v ? best - v : v - best) && c > best) best = c;
      end
      if (best == top) begin best = 0; carry = 1; end else carry = 0;
      res = res | (best << (4 * q));
      m = 0;
      for (int c = 0; c < top; c++) if (ref_supported(c, na)) m = c;
      sat = sat | (m << (4 * q));
    end
    if (carry) res = sat;
    return neg ? -res : res;
  endfunction

  // PLAN sigmoid on a fixed-point sum with frac fractional bits, returned as
  // an out_w-bit fraction, truncated.
  function automatic int ref_plan(input longint x, input int frac, input int out_w);
    longint one, ax, yp, y;
    one = longint'(1) << frac;
    ax  = (x < 0) ? -x : x;
    if (ax >= 5 * one)              yp = one;
    else if (8 * ax >= 19 * one)    yp = (ax >>> 5) + ((27 * one) >>> 5);
    else if (ax >= one)             yp = (ax >>> 3) + ((5 * one) >>> 3);
    else                            yp = (ax >>> 2) + (one >>> 1);
    y = (x < 0) ? one - yp : yp;
    if (y >= one) return (1 << out_w) - 1;
    return int'(y >>> (frac - out_w));
  endfunction

endpackage
