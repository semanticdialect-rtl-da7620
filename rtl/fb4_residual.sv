// fb4_residual -- residual of an FB4 quantization, returned as FP16.
//
// Activation decomposition writes an activation as A = Q(A) + Delta and then
// quantizes Delta again with the same FB4 format, so that (Q(A) + Q(Delta))
// stands in for A. This block computes Delta for a whole block: it takes the
// FP16 input block and its FB4 quantization (elements, dialect ID, shared
// exponent) and returns Delta = A - Q(A) element by element in FP16, ready to
// go back into the quantization unit.
//
// How: each |x| is brought to a fixed-point grid of 2^(E-14) (eleven fraction
// bits below the FB4 integer grid), the dequantized magnitude
// FORMATBOOK[did][idx] * 2^11 is subtracted on the same grid, and the signed
// difference is renormalised to FP16 (normal or subnormal). Bits of |x| below
// the grid are truncated, and so are bits that do not fit the 10-bit FP16
// mantissa; both losses are far below the FB4 step.
//
// Interface: purely combinational; x[N_ELEM], q[N_ELEM], meta in, delta out.
// From the paper: the decomposition A = Q(A) + Delta and re-quantization of
// Delta in the same format. This design's own choices: FP16 for Delta, the
// grid and the truncation.
module fb4_residual
  import fb4_pkg::*;
#(
  parameter int unsigned N_ELEM = fb4_pkg::BLK
) (
  input  fp16_t     x     [N_ELEM],
  input  fb4_elem_t q     [N_ELEM],
  input  fb4_meta_t meta,
  output fp16_t     delta [N_ELEM]
);

  mag_t row [8];

  fb4_formatbook u_fb (
    .did (meta.did),
    .mag (row)
  );

  always_comb begin
    for (int i = 0; i < N_ELEM; i++) begin
      logic [4:0]         ee;
      logic [10:0]        m;
      int                 sh;
      logic signed [17:0] u, v, r;
      logic        [15:0] a;
      int                 p, biased;
      logic               sgn;
      logic        [9:0]  man;

      man = '0;
      ee = (x[i][14:10] == 5'd0) ? 5'd1 : x[i][14:10];
      m  = {x[i][14:10] != 5'd0, x[i][9:0]};
      sh = int'(ee) - int'(meta.exp) + 5;
      if (sh >= 0) u = 18'(m) << sh;
      else if (sh <= -12) u = '0;
      else         u = 18'(m >> (-sh));
      v = 18'(row[q[i].idx]) << 11;
      r = u - v;
      sgn = x[i][15] ^ r[17];
      a   = r[17] ? 16'(-r) : 16'(r);

      p = 0;
      for (int k = 0; k < 16; k++)
        if (a[k]) p = k;
      biased = p + int'(meta.exp) - 15;

      if (a == '0) begin
        delta[i] = '0;
      end else if (biased >= 1) begin
        if (p >= 10) man = 10'(a >> (p - 10));
        else         man = 10'(a << (10 - p));
        delta[i] = {sgn, 5'(biased), man};
      end else begin
        if (meta.exp >= 5'd6) man = 10'(a << (int'(meta.exp) - 6));
        else                  man = 10'(a >> (6 - int'(meta.exp)));
        delta[i] = {sgn, 5'd0, man};
      end
    end
  end

endmodule
