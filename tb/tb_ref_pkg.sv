// tb_ref_pkg: reference arithmetic shared by the testbenches. It recomputes
// the requantization of one output channel with wide integer arithmetic,
// written directly from the formula
//   code = round_half_up(clamp(acc * q * 2^-shr + bias / 2^8
//                              + skip * qs * 2^-shs, 0, 2^B - 1))
// and is independent of the RTL's fixed-point datapath.
package tb_ref_pkg;
  typedef struct {
    int unsigned code;
    bit          lo;
    bit          hi;
  } rq_t;

  function automatic rq_t requant(longint acc, int q, int shr, int bias,
                                  bit skip_en, int skip, int qs, int shs, bit img);
    // value scaled by 2^40 so that every term is an exact integer
    logic signed [159:0] v, hi_v, half;
    rq_t r;
    v = 160'(acc) * 160'(q) * (160'sd1 <<< (40 - shr))
      + 160'(bias) * (160'sd1 <<< 32);
    if (skip_en) v = v + 160'(skip) * 160'(qs) * (160'sd1 <<< (40 - shs));
    hi_v = ((160'sd1 <<< (img ? 16 : 8)) - 1) <<< 40;
    half = 160'sd1 <<< 39;
    r.lo = v < 0;
    r.hi = v > hi_v;
    if (r.lo) v = 0;
    else if (r.hi) v = hi_v;
    r.code = int'((v + half) >>> 40);
    return r;
  endfunction

  // 8-bit convolution input derived from a 16-bit image code
  function automatic int to_act(int c);
    int r;
    r = (c + 128) / 256;
    return (r > 255) ? 255 : r;
  endfunction
endpackage
