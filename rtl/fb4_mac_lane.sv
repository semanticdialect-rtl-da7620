// fb4_mac_lane -- one lane of the FB4 multiply-accumulate unit.
//
// Each cycle the lane takes one activation block and one weight block, both
// FB4 with N_ELEM elements, and adds their dot product to its accumulator.
// The lane's formatbook turns the two dialect IDs into two rows of eight
// 4-bit magnitudes; every multiplier picks its two magnitudes by index and
// forms a 4x4-bit unsigned product, and the sign is the XOR of the two sign
// bits. The N_ELEM signed products are summed into an integer partial sum.
// The two shared exponents are simply added: the partial sum is worth
// psum * 2^((Ea-3) + (Ew-3)), E = exp code - 16. That scale is applied as a
// shift into a fixed-point accumulator with ACC_FRAC fraction bits.
//
// Timing: stage 1 registers partial sum and exponent sum; stage 2 updates the
// accumulator. acc is valid two cycles after in_valid (acc_valid), and
// acc_last marks the result of a block that came with in_last. in_clear
// starts a new dot product (accumulator := this block's term).
//
// From the paper: 8 lanes of block-size-16 MACs per cycle, a formatbook per
// lane shared by its multipliers, integer magnitudes 0..15, scaling by
// exponent addition. This design's own choices: the accumulator format
// (ACC_W bits, ACC_FRAC fraction bits, terms below 2^-ACC_FRAC truncated
// toward minus infinity, saturation instead of wrap), the two-stage pipeline,
// and one formatbook instance per operand.
module fb4_mac_lane
  import fb4_pkg::*;
#(
  parameter int unsigned N_ELEM   = fb4_pkg::BLK,
  parameter int unsigned ACC_W    = 64,
  parameter int unsigned ACC_FRAC = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_clear,
  input  logic                    in_last,
  input  fb4_elem_t               a_elem [N_ELEM],
  input  fb4_meta_t               a_meta,
  input  fb4_elem_t               w_elem [N_ELEM],
  input  fb4_meta_t               w_meta,
  output logic signed [ACC_W-1:0] acc,
  output logic                    acc_valid,
  output logic                    acc_last
);

  localparam int PS_W = 8 + $clog2(N_ELEM) + 2;
  localparam int SHIFT_OFS = ACC_FRAC - 2*EXP_BIAS - 6;

  mag_t a_row [8];
  mag_t w_row [8];

  fb4_formatbook u_fb_a (.did(a_meta.did), .mag(a_row));
  fb4_formatbook u_fb_w (.did(w_meta.did), .mag(w_row));

  logic signed [PS_W-1:0] psum;

  always_comb begin
    psum = '0;
    for (int i = 0; i < N_ELEM; i++) begin
      logic [7:0] prod;
      prod = 8'(a_row[a_elem[i].idx]) * 8'(w_row[w_elem[i].idx]);
      if (a_elem[i].sign ^ w_elem[i].sign) psum = psum - PS_W'(prod);
      else                                  psum = psum + PS_W'(prod);
    end
  end

  // Stage 1
  logic signed [PS_W-1:0] s1_psum;
  logic [EXP_W:0]         s1_esum;
  logic                   s1_valid, s1_clear, s1_last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_clear <= 1'b0;
      s1_last  <= 1'b0;
      s1_psum  <= '0;
      s1_esum  <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_clear <= in_clear;
        s1_last  <= in_last;
        s1_psum  <= psum;
        s1_esum  <= (EXP_W+1)'(a_meta.exp) + (EXP_W+1)'(w_meta.exp);
      end
    end
  end

  // Stage 2: scale by exponent sum and accumulate (saturating).
  logic signed [ACC_W-1:0] term;
  logic signed [ACC_W:0]   sum;
  logic signed [ACC_W-1:0] acc_next;

  always_comb begin
    int sh;
    sh = int'(s1_esum) + SHIFT_OFS;
    if (sh >= 0) term = ACC_W'(s1_psum) <<< sh;
    else         term = ACC_W'(s1_psum) >>> (-sh);
    sum = (ACC_W+1)'(acc) + (ACC_W+1)'(term);
    if (s1_clear)                      acc_next = term;
    else if (sum[ACC_W] != sum[ACC_W-1])
      acc_next = sum[ACC_W] ? {1'b1, {(ACC_W-1){1'b0}}} : {1'b0, {(ACC_W-1){1'b1}}};
    else                               acc_next = sum[ACC_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      acc_valid <= 1'b0;
      acc_last  <= 1'b0;
    end else begin
      acc_valid <= s1_valid;
      acc_last  <= s1_valid && s1_last;
      if (s1_valid) acc <= acc_next;
    end
  end

endmodule
