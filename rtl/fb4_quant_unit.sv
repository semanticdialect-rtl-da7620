// fb4_quant_unit -- online FB4 quantization of one FP16 block per cycle.
//
// This is the quantization unit that sits next to the global buffer control.
// It turns a block of BLK FP16 values into BLK FB4 elements plus 10 bits of
// metadata (dialect ID and shared exponent). The steps, all in one cycle:
//   1. block maximum of the magnitudes; shared exponent E = floor(log2(max))
//      (exponent and leading-one arithmetic on the FP16 fields);
//   2. shift-and-truncate: every element becomes a 5-bit bin index
//      b = floor(|x| * 2^(4-E)), i.e. the value scaled into [0,16) (exponent
//      offset by 3) on a 0.5-wide grid;
//   3. group-wise maximum: the block is split into NGROUPS groups of adjacent
//      elements and the largest bin of each group is kept;
//   4. stage one of the dialect choice: the bin of the block maximum gives
//      the dynamic range r (block maximum 8+r), which selects the dialects of
//      that range (the sub-formatbook of candidates);
//   5. stage two: for each candidate the Qerror LUT entries of the group
//      maxima are summed; the candidate with the smallest sum wins (the lowest
//      ID on a tie). With seda_en set, the dialect is instead the one the SeDA
//      sub-formatbook holds for range r;
//   6. every element's 3-bit index is read from the Qvalue LUT of the chosen
//      dialect; its sign is copied.
// The result is registered: latency 1 cycle, one block accepted every cycle,
// matching the one cycle per block the paper reports for FB4.
//
// From the paper: steps 1-6, 8 groups, 0.5-wide bins, midpoint-error Qerror,
// two-stage selection, sub-formatbook constraint, one block per cycle.
// This design's own choices: FP16 input; groups of adjacent elements;
// lowest-ID tie break; blocks whose exponent is below -16 (or all zero) are
// flushed to zero with exp code 0 and DID 0; FP16 Inf/NaN codes are treated
// as large finite numbers; synchronous active-low reset.
module fb4_quant_unit
  import fb4_pkg::*;
#(
  parameter int unsigned N_ELEM = fb4_pkg::BLK,     // block size
  parameter int unsigned N_GRP  = fb4_pkg::NGROUPS  // num_groups
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  fp16_t     in_data [N_ELEM],
  input  logic      seda_en,              // constrain to the sub-formatbook
  input  did_t      subfb [NRANGE],       // one dialect per dynamic range
  output logic      out_valid,
  output fb4_elem_t out_elem [N_ELEM],
  output fb4_meta_t out_meta,
  output range_t    out_range,            // dynamic range of the block
  output logic      out_zero              // block flushed to zero
);

  localparam int GSZ = N_ELEM / N_GRP;
  localparam qval_lut_t QVAL_LUT = make_qval_lut();
  localparam qerr_lut_t QERR_LUT = make_qerr_lut();

  // ---------------------------------------------------------------- step 1
  logic [14:0] max_mag;
  logic [4:0]  ee_max;    // effective FP16 exponent of the maximum
  logic [10:0] m_max;     // significand of the maximum, hidden bit included
  int          lz_max;    // leading zeros of m_max
  int          e_shared;  // floor(log2(max))
  logic        zero_blk;

  always_comb begin
    max_mag = '0;
    for (int i = 0; i < N_ELEM; i++)
      if (in_data[i][14:0] > max_mag) max_mag = in_data[i][14:0];
    ee_max = (max_mag[14:10] == 5'd0) ? 5'd1 : max_mag[14:10];
    m_max  = {max_mag[14:10] != 5'd0, max_mag[9:0]};
    lz_max = 11;
    for (int k = 0; k < 11; k++)
      if (m_max[k]) lz_max = 10 - k;
    e_shared = int'(ee_max) - 15 - lz_max;
    zero_blk = (max_mag == '0) || (e_shared < -EXP_BIAS);
  end

  // ---------------------------------------------------------------- step 2
  bin_t bin [N_ELEM];

  always_comb begin
    for (int i = 0; i < N_ELEM; i++) begin
      logic [4:0]  ee;
      logic [14:0] m4;
      int          sh;
      ee = (in_data[i][14:10] == 5'd0) ? 5'd1 : in_data[i][14:10];
      m4 = {in_data[i][14:10] != 5'd0, in_data[i][9:0], 4'b0000};
      sh = int'(ee_max) - int'(ee) + 10 - lz_max;
      if (sh >= 15) bin[i] = '0;
      else          bin[i] = bin_t'(m4 >> sh);
    end
  end

  // ---------------------------------------------------------------- step 3
  bin_t   gmax [N_GRP];
  bin_t   bin_max;
  range_t rng;

  always_comb begin
    for (int g = 0; g < N_GRP; g++) begin
      gmax[g] = '0;
      for (int j = 0; j < GSZ; j++)
        if (bin[g*GSZ + j] > gmax[g]) gmax[g] = bin[g*GSZ + j];
    end
    bin_max = '0;
    for (int g = 0; g < N_GRP; g++)
      if (gmax[g] > bin_max) bin_max = gmax[g];
    // ------------------------------------------------------------ step 4
    // Non-zero blocks have bin_max in 16..31: range = floor(max) - 8.
    rng = range_t'(bin_max[BIN_W-2:1]);
  end

  // ---------------------------------------------------------------- step 5
  localparam int SUM_W = QERR_W + $clog2(N_GRP) + 1;
  logic [SUM_W-1:0] cand_err [MAXCAND];
  logic [SUM_W-1:0] best_err;
  did_t             best_did, sel_did;

  always_comb begin
    for (int c = 0; c < MAXCAND; c++) begin
      int d;
      d = RANGE_BASE[rng] + c;
      if (d > NDIALECT - 1) d = NDIALECT - 1;
      cand_err[c] = '0;
      for (int g = 0; g < N_GRP; g++)
        cand_err[c] = cand_err[c] + SUM_W'(QERR_LUT[d*NBIN + int'(gmax[g])]);
    end
    best_err = cand_err[0];
    best_did = did_t'(RANGE_BASE[rng]);
    for (int c = 1; c < MAXCAND; c++)
      if (c < RANGE_CNT[rng] && cand_err[c] < best_err) begin
        best_err = cand_err[c];
        best_did = did_t'(RANGE_BASE[rng] + c);
      end
    if (zero_blk)     sel_did = '0;
    else if (seda_en) sel_did = subfb[rng];
    else              sel_did = best_did;
  end

  // ---------------------------------------------------------------- step 6
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_meta  <= '0;
      out_range <= '0;
      out_zero  <= 1'b0;
      for (int i = 0; i < N_ELEM; i++) out_elem[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_meta.did <= sel_did;
        out_meta.exp <= zero_blk ? '0 : exp_t'(e_shared + EXP_BIAS);
        out_range    <= zero_blk ? '0 : rng;
        out_zero     <= zero_blk;
        for (int i = 0; i < N_ELEM; i++) begin
          out_elem[i].sign <= zero_blk ? 1'b0 : in_data[i][15];
          out_elem[i].idx  <= zero_blk ? '0 : QVAL_LUT[{sel_did, bin[i]}];
        end
      end
    end
  end

endmodule
