// fb4_pkg -- shared constants, types and the formatbook of the FB4 format.
//
// FB4 is a block-wise 4-bit format. A block of BLK elements shares one
// power-of-two exponent and one dialect ID (DID). Each element is a sign bit
// plus a 3-bit index into the eight magnitudes of its dialect; the magnitudes
// are unsigned integers 0..15. With the shared exponent offset by 3, the value
// of an element is  (-1)^sign * FORMATBOOK[did][idx] * 2^(E-3),  where E is
// floor(log2) of the block's largest magnitude, so the block maximum lands in
// [8,16) before rounding.
//
// Following the paper: block size 16 in the RTL, 32 dialects, eight magnitudes
// per dialect taken from 0..15, 5-bit DID, 5-bit shared exponent, 8 groups for
// the group-wise maximum, 0.5-wide LUT bins, Qerror = midpoint absolute error,
// dialects grouped by dynamic range with fewer dialects for narrower ranges,
// one sub-formatbook entry per dynamic range (block maxima 8..15).
//
// This design's own choices: the actual 32 magnitude sets (the paper's table
// is a figure not reproduced here), the split of the 32 dialects over the 8
// ranges (2,2,3,4,5,5,5,6), the exponent bias of 16 and the flush of blocks
// whose exponent is below -16, and the Qerror unit of 1/4.
//
// The Qvalue and Qerror tables are not stored as data: the functions
// qvalue() and qerror() compute them from FORMATBOOK at elaboration time.
package fb4_pkg;

  localparam int BLK       = 16;  // elements per block (RTL block size)
  localparam int NGROUPS   = 8;   // num_groups for the group-wise maximum
  localparam int NDIALECT  = 32;  // formatbook size
  localparam int NRANGE    = 8;   // dynamic ranges: block maximum 8..15
  localparam int MAXCAND   = 6;   // largest number of dialects in one range
  localparam int NLANES    = 8;   // MAC lanes
  localparam int NBIN      = 32;  // 0.5-wide bins over [0,16)

  localparam int DID_W     = 5;
  localparam int EXP_W     = 5;
  localparam int IDX_W     = 3;
  localparam int MAG_W     = 4;
  localparam int BIN_W     = 5;
  localparam int QERR_W    = 6;   // |bin centre - value| in units of 1/4
  localparam int RANGE_W   = 3;

  localparam int EXP_BIAS  = 16;  // exp code = E + 16, E in [-16,15]

  typedef logic [15:0]        fp16_t;
  typedef logic [DID_W-1:0]   did_t;
  typedef logic [EXP_W-1:0]   exp_t;
  typedef logic [MAG_W-1:0]   mag_t;
  typedef logic [BIN_W-1:0]   bin_t;
  typedef logic [QERR_W-1:0]  qerr_t;
  typedef logic [RANGE_W-1:0] range_t;

  // One FB4 element: sign and 3-bit dialect index.
  typedef struct packed {
    logic             sign;
    logic [IDX_W-1:0] idx;
  } fb4_elem_t;

  // Block metadata: 10 bits per block (5-bit DID, 5-bit shared exponent).
  typedef struct packed {
    did_t did;
    exp_t exp;
  } fb4_meta_t;

  // Attention-score transform used when scoring salient tokens.
  typedef enum logic [1:0] {
    SCORE_RAW  = 2'd0,
    SCORE_RELU = 2'd1,   // temporal attention in the paper
    SCORE_ABS  = 2'd2    // spatial / 3D attention in the paper
  } score_mode_t;

  // Which activation blocks get decomposed into Q(A) + Q(Delta).
  typedef enum logic [1:0] {
    DECOMP_OFF     = 2'd0,
    DECOMP_ALL     = 2'd1,   // vector activations (modulation layers)
    DECOMP_SALIENT = 2'd2    // matrix activations: one salient token per tile
  } decomp_mode_t;

  // Formatbook. Rows are dialects, grouped by dynamic range; the last entry
  // of each row is the range's block maximum (8..15). Index 0 is always 0.
  localparam logic [3:0] FORMATBOOK [NDIALECT][8] = '{
    // range 8
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd5, 4'd6,  4'd8},   //  0
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd6, 4'd7,  4'd8},   //  1
    // range 9
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd5, 4'd6,  4'd9},   //  2
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd5, 4'd6, 4'd7,  4'd9},   //  3
    // range 10
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd5, 4'd7,  4'd10},  //  4
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd6, 4'd8,  4'd10},  //  5
    '{4'd0, 4'd1, 4'd2, 4'd4, 4'd6, 4'd7, 4'd8,  4'd10},  //  6
    // range 11
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd5, 4'd7,  4'd11},  //  7
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd6, 4'd8,  4'd11},  //  8
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd5, 4'd7, 4'd9,  4'd11},  //  9
    '{4'd0, 4'd1, 4'd2, 4'd4, 4'd6, 4'd8, 4'd10, 4'd11},  // 10
    // range 12
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd6, 4'd8,  4'd12},  // 11
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd5, 4'd7, 4'd9,  4'd12},  // 12
    '{4'd0, 4'd1, 4'd2, 4'd4, 4'd6, 4'd8, 4'd10, 4'd12},  // 13
    '{4'd0, 4'd1, 4'd3, 4'd5, 4'd7, 4'd9, 4'd11, 4'd12},  // 14
    '{4'd0, 4'd2, 4'd4, 4'd6, 4'd8, 4'd10, 4'd11, 4'd12}, // 15
    // range 13
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd4, 4'd6, 4'd9,  4'd13},  // 16
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd5, 4'd7, 4'd10, 4'd13},  // 17
    '{4'd0, 4'd1, 4'd2, 4'd4, 4'd6, 4'd8, 4'd11, 4'd13},  // 18
    '{4'd0, 4'd1, 4'd3, 4'd5, 4'd7, 4'd9, 4'd11, 4'd13},  // 19
    '{4'd0, 4'd2, 4'd4, 4'd6, 4'd8, 4'd10, 4'd12, 4'd13}, // 20
    // range 14
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd5, 4'd7, 4'd10, 4'd14},  // 21
    '{4'd0, 4'd1, 4'd2, 4'd4, 4'd6, 4'd8, 4'd11, 4'd14},  // 22
    '{4'd0, 4'd1, 4'd3, 4'd5, 4'd7, 4'd9, 4'd12, 4'd14},  // 23
    '{4'd0, 4'd2, 4'd4, 4'd6, 4'd8, 4'd10, 4'd12, 4'd14}, // 24
    '{4'd0, 4'd2, 4'd4, 4'd7, 4'd9, 4'd11, 4'd13, 4'd14}, // 25
    // range 15
    '{4'd0, 4'd1, 4'd2, 4'd3, 4'd5, 4'd7, 4'd10, 4'd15},  // 26
    '{4'd0, 4'd1, 4'd2, 4'd4, 4'd6, 4'd9, 4'd12, 4'd15},  // 27
    '{4'd0, 4'd1, 4'd3, 4'd5, 4'd7, 4'd9, 4'd12, 4'd15},  // 28
    '{4'd0, 4'd2, 4'd4, 4'd6, 4'd8, 4'd10, 4'd13, 4'd15}, // 29
    '{4'd0, 4'd2, 4'd4, 4'd7, 4'd9, 4'd11, 4'd13, 4'd15}, // 30
    '{4'd0, 4'd3, 4'd5, 4'd7, 4'd9, 4'd11, 4'd13, 4'd15}  // 31
  };

  // First dialect and number of dialects of each dynamic range (block
  // maximum 8+r).
  localparam int RANGE_BASE [NRANGE] = '{0, 2, 4, 7, 11, 16, 21, 26};
  localparam int RANGE_CNT  [NRANGE] = '{2, 2, 3, 4, 5, 5, 5, 6};

  // Dynamic range a dialect belongs to.
  function automatic range_t range_of(input did_t d);
    range_t r;
    r = '0;
    for (int k = 0; k < NRANGE; k++)
      if (int'(d) >= RANGE_BASE[k]) r = range_t'(k);
    return r;
  endfunction

  // Qvalue: index of the representable value nearest to the centre of bin b
  // (bin b covers [b/2, (b+1)/2)). Distances are kept in units of 1/4:
  // |2b+1 - 4v|. The centre is never halfway between two integers, so the
  // nearest value is unique and equals the nearest value of every point of
  // the bin: the lookup is exact.
  function automatic logic [IDX_W-1:0] qvalue(input did_t d, input int b);
    int               best, dst;
    logic [IDX_W-1:0] bi;
    best = 1 << 30;
    bi   = 0;
    for (int i = 0; i < 8; i++) begin
      dst = 2*b + 1 - 4*int'(FORMATBOOK[d][i]);
      if (dst < 0) dst = -dst;
      if (dst < best) begin
        best = dst;
        bi   = IDX_W'(i);
      end
    end
    return bi;
  endfunction

  // Qerror: absolute quantization error at the bin midpoint, units of 1/4.
  function automatic qerr_t qerror(input did_t d, input int b);
    int best, dst;
    best = 1 << 30;
    for (int i = 0; i < 8; i++) begin
      dst = 2*b + 1 - 4*int'(FORMATBOOK[d][i]);
      if (dst < 0) dst = -dst;
      if (dst < best) best = dst;
    end
    return qerr_t'(best);
  endfunction

  // Whole Qvalue and Qerror tables, flattened: entry d*NBIN + b holds
  // dialect d, bin b.
  typedef logic [IDX_W-1:0] qval_lut_t [NDIALECT*NBIN];
  typedef qerr_t            qerr_lut_t [NDIALECT*NBIN];

  function automatic qval_lut_t make_qval_lut();
    qval_lut_t t;
    for (int d = 0; d < NDIALECT; d++)
      for (int b = 0; b < NBIN; b++)
        t[d*NBIN + b] = qvalue(did_t'(d), b);
    return t;
  endfunction

  function automatic qerr_lut_t make_qerr_lut();
    qerr_lut_t t;
    for (int d = 0; d < NDIALECT; d++)
      for (int b = 0; b < NBIN; b++)
        t[d*NBIN + b] = qerror(did_t'(d), b);
    return t;
  endfunction

endpackage
