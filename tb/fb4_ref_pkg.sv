// fb4_ref_pkg -- reference model of FB4 for the testbenches.
//
// Written with real arithmetic and direct searches, independently of the RTL's
// bin arithmetic and LUTs: FP16 <-> real conversion, block quantization
// (shared exponent, two-stage dialect choice by summed midpoint error of the
// group maxima, nearest-value rounding with ties upward, which is what the
// 0.5-wide Qvalue bins implement), dequantization, and an FP16 random
// generator. Only the format definition (FORMATBOOK and the range grouping)
// is taken from fb4_pkg.
package fb4_ref_pkg;
  import fb4_pkg::*;

  function automatic real pow2(input int k);
    real r;
    r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(input fp16_t h);
    real m;
    if (h[14:10] == 5'd0) m = real'(h[9:0]) * pow2(-24);
    else                  m = (1024.0 + real'(h[9:0])) * pow2(int'(h[14:10]) - 25);
    return h[15] ? -m : m;
  endfunction

  // floor(log2(a)) for a > 0
  function automatic int flog2(input real a);
    int k;
    k = -40;
    while (pow2(k + 1) <= a) k++;
    return k;
  endfunction

  // Real to FP16, magnitude truncated toward zero.
  function automatic fp16_t real_to_fp16_trunc(input real y);
    real a;
    int  k;
    logic [9:0] man;
    logic s;
    s = (y < 0.0);
    a = s ? -y : y;
    if (a == 0.0) return '0;
    k = flog2(a);
    if (k >= -14) begin
      man = 10'($floor(a / pow2(k - 10)) - 1024.0);
      return {s, 5'(k + 15), man};
    end
    man = 10'($floor(a / pow2(-24)));
    return {s, 5'd0, man};
  endfunction

  typedef struct {
    fb4_elem_t e [BLK];
    fb4_meta_t meta;
    int        range_id;
    bit        zero;
  } ref_q_t;

  // Index of the value nearest to xs in dialect d; ties go to the larger value.
  function automatic int nearest_idx(input int d, input real xs);
    int  bi;
    real be, e;
    bi = 0;
    be = 1.0e9;
    for (int i = 0; i < 8; i++) begin
      e = xs - real'(FORMATBOOK[d][i]);
      if (e < 0) e = -e;
      if (e <= be) begin
        be = e;
        bi = i;
      end
    end
    return bi;
  endfunction

  function automatic real min_err(input int d, input real xs);
    return (xs > real'(FORMATBOOK[d][nearest_idx(d, xs)])) ?
           xs - real'(FORMATBOOK[d][nearest_idx(d, xs)]) :
           real'(FORMATBOOK[d][nearest_idx(d, xs)]) - xs;
  endfunction

  function automatic ref_q_t ref_quant(input fp16_t x [BLK], input bit seda,
                                       input did_t subfb [NRANGE]);
    ref_q_t q;
    real    mx, xs [BLK], gm, best, err;
    int     e, r, bd, gsz;
    mx = 0.0;
    for (int i = 0; i < BLK; i++) begin
      real a;
      a = fp16_to_real(x[i]);
      if (a < 0) a = -a;
      if (a > mx) mx = a;
    end
    q.zero = 1'b0;
    if (mx == 0.0) q.zero = 1'b1;
    else begin
      e = flog2(mx);
      if (e < -EXP_BIAS) q.zero = 1'b1;
    end
    if (q.zero) begin
      for (int i = 0; i < BLK; i++) q.e[i] = '0;
      q.meta = '0;
      q.range_id = 0;
      return q;
    end
    for (int i = 0; i < BLK; i++) begin
      xs[i] = fp16_to_real(x[i]) * pow2(3 - e);
      if (xs[i] < 0) xs[i] = -xs[i];
    end
    r = int'($floor(mx * pow2(3 - e))) - 8;
    // stage 2: summed midpoint error of the group maxima
    gsz  = BLK / NGROUPS;
    best = 1.0e9;
    bd   = RANGE_BASE[r];
    for (int c = 0; c < RANGE_CNT[r]; c++) begin
      err = 0.0;
      for (int g = 0; g < NGROUPS; g++) begin
        gm = 0.0;
        for (int j = 0; j < gsz; j++)
          if (xs[g*gsz+j] > gm) gm = xs[g*gsz+j];
        // midpoint of the 0.5-wide bin holding gm
        err += min_err(RANGE_BASE[r] + c, $floor(gm * 2.0) / 2.0 + 0.25);
      end
      if (err < best) begin
        best = err;
        bd   = RANGE_BASE[r] + c;
      end
    end
    if (seda) bd = subfb[r];
    q.meta.did = did_t'(bd);
    q.meta.exp = exp_t'(e + EXP_BIAS);
    q.range_id = r;
    for (int i = 0; i < BLK; i++) begin
      q.e[i].sign = x[i][15];
      q.e[i].idx  = 3'(nearest_idx(bd, xs[i]));
    end
    return q;
  endfunction

  // Value of one FB4 element.
  function automatic real deq(input fb4_elem_t el, input fb4_meta_t m);
    real v;
    v = real'(FORMATBOOK[m.did][el.idx]) * pow2(int'(m.exp) - EXP_BIAS - 3);
    return el.sign ? -v : v;
  endfunction

  // Dot product of two FB4 blocks as an exact fixed-point number with
  // acc_frac fraction bits, rounded toward minus infinity.
  typedef logic signed [127:0] wide_t;

  function automatic wide_t ref_term(input fb4_elem_t a [BLK], input fb4_meta_t am,
                                     input fb4_elem_t w [BLK], input fb4_meta_t wm,
                                     input int acc_frac);
    wide_t p;
    int    sh;
    p = 0;
    for (int i = 0; i < BLK; i++) begin
      int pr;
      pr = int'(FORMATBOOK[am.did][a[i].idx]) * int'(FORMATBOOK[wm.did][w[i].idx]);
      if (a[i].sign != w[i].sign) pr = -pr;
      p = p + wide_t'(pr);
    end
    // value = p * 2^(Ea-3 + Ew-3), E = exp code - EXP_BIAS
    sh = int'(am.exp) + int'(wm.exp) - 2*EXP_BIAS - 6 + acc_frac;
    if (sh >= 0) return p <<< sh;
    return p >>> (-sh);
  endfunction

  function automatic wide_t sat(input wide_t v, input int w);
    wide_t mx, mn;
    mx = (wide_t'(1) <<< (w - 1)) - 1;
    mn = -(wide_t'(1) <<< (w - 1));
    if (v > mx) return mx;
    if (v < mn) return mn;
    return v;
  endfunction

  // Random FB4 block with an exponent code in [elo, ehi].
  function automatic void rand_fb4(output fb4_elem_t e [BLK], output fb4_meta_t m,
                                   input int elo, input int ehi);
    for (int i = 0; i < BLK; i++) e[i] = fb4_elem_t'($urandom);
    m.did = did_t'($urandom);
    m.exp = exp_t'($urandom_range(ehi, elo));
  endfunction

  // Random FP16 block: exponents spread below a random block exponent, a few
  // zeros; kind 1 gives an all-zero block, kind 2 a block below the flush
  // limit, kind 3 subnormals only.
  function automatic void rand_block(output fp16_t x [BLK], input int kind,
                                     input int spread);
    int top;
    top = 2 + int'($urandom_range(27, 0));
    for (int i = 0; i < BLK; i++) begin
      int ex;
      ex = top - int'($urandom_range(spread, 0));
      if (ex < 1) ex = 1;
      x[i] = {1'($urandom), 5'(ex), 10'($urandom)};
      if ($urandom_range(9, 0) == 0) x[i] = {1'($urandom), 15'd0};
      case (kind)
        1: x[i] = '0;
        2: x[i] = {1'($urandom), 5'd0, 10'($urandom_range(255, 0))};
        3: x[i] = {1'($urandom), 5'd0, 10'($urandom)};
        default: ;
      endcase
    end
  endfunction

endpackage
