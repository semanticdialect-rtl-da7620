// sd_fb4_top -- FB4 datapath with activation decomposition and SeDA.
//
// This is the quantize-then-multiply path of an accelerator that runs the
// linear layers of a video diffusion transformer in FB4. FP16 activation
// blocks from the global buffer are quantized online (fb4_quant_unit, one
// block per cycle) and fed to the processing element's FB4 MAC (fb4_mac,
// N_LANES lanes) together with weight blocks that were quantized offline.
// Around that path sit the two SemanticDialect mechanisms:
//
//  * Activation decomposition. A block marked for decomposition is quantized
//    twice: first A, then the residual Delta = A - Q(A) (fb4_residual), which
//    goes back through the same quantization unit in the next cycle. Both
//    Q(A) and Q(Delta) are multiplied with the same weight block and summed
//    in the same accumulators, giving (Q(A)+Q(Delta))W. The input is stalled
//    (in_ready low) for the one cycle the residual occupies the unit.
//    decomp_mode selects no decomposition, every block (vector activations),
//    or only the blocks of the tile's salient token (matrix activations).
//    The salient token comes from salient_token_selector, fed with attention
//    scores; the last result is held in salient_token and compared with
//    in_token.
//  * SeDA. Blocks flagged in_anchor are profiled: the dialect chosen for them
//    is counted by seda_subfb_builder; prof_build turns the counts into the
//    8-dialect sub-formatbook. Blocks flagged in_seda (anchor or correlated
//    tokens) are quantized with the dialect the sub-formatbook holds for their
//    dynamic range, for both the A pass and the Delta pass.
//
// Timing: a block accepted at cycle t is quantized at t+1 (q_valid), enters
// the MAC at t+1 and its accumulation is visible at t+3. With decomposition
// the Delta pass follows one cycle later. out_valid pulses with the
// accumulators once the block marked in_last (and its Delta pass) has been
// accumulated; in_first clears the accumulators. Weights are sampled with the
// block and held for the Delta pass.
//
// From the paper: quantization unit on the buffer side and FB4 MAC in the
// PE, decomposition as (Q(A)+Q(Delta))W in the same format, sub-formatbook
// shared by anchor and correlated tokens, both passes constrained by SeDA,
// per-tile salient token. This design's own choices: the valid/ready
// handshake, the flags that mark blocks (the token bookkeeping of the host
// software is outside this block), reusing one quantization unit for the
// Delta pass, and profiling only the A pass of anchor blocks that are not
// flushed to zero.
module sd_fb4_top
  import fb4_pkg::*;
#(
  parameter int unsigned N_LANES  = fb4_pkg::NLANES,
  parameter int unsigned N_ELEM   = fb4_pkg::BLK,
  parameter int unsigned N_GRP    = fb4_pkg::NGROUPS,
  parameter int unsigned ACC_W    = 64,
  parameter int unsigned ACC_FRAC = 24,
  parameter int unsigned N_TOK    = 16,
  parameter int unsigned N_NB     = 16,
  parameter int unsigned SCORE_W  = 16,
  localparam int TOK_W = $clog2(N_TOK),
  localparam int SUM_W = SCORE_W + $clog2(N_NB) + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  decomp_mode_t              decomp_mode,
  // activation blocks from the global buffer
  input  logic                      in_valid,
  output logic                      in_ready,
  input  fp16_t                     in_data   [N_ELEM],
  input  logic                      in_first,   // first block of a dot product
  input  logic                      in_last,    // last block of a dot product
  input  logic [TOK_W-1:0]          in_token,   // token position in its tile
  input  logic                      in_seda,    // use the SeDA sub-formatbook
  input  logic                      in_anchor,  // profile this block for SeDA
  // offline-quantized weight blocks, one per lane
  input  fb4_elem_t                 w_elem    [N_LANES][N_ELEM],
  input  fb4_meta_t                 w_meta    [N_LANES],
  // SeDA profiling control
  input  logic                      prof_clear,
  input  logic                      prof_build,
  output did_t                      subfb     [NRANGE],
  output logic                      subfb_valid,
  // attention scores for salient-token selection
  input  logic                      sc_valid,
  input  logic                      sc_first,
  input  score_mode_t               sc_mode,
  input  logic signed [SCORE_W-1:0] sc_score  [N_NB],
  output logic [TOK_W-1:0]          salient_token,
  output logic signed [SUM_W-1:0]   salient_sum,
  output logic                      salient_valid,
  // quantized activation stream (for the PE buffers)
  output logic                      q_valid,
  output fb4_elem_t                 q_elem    [N_ELEM],
  output fb4_meta_t                 q_meta,
  output range_t                    q_range,    // dynamic range of the block
  output logic                      q_residual, // 1: this is Q(Delta)
  // dot-product results
  output logic                      acc_update, // accumulators changed
  output logic                      out_valid,
  output logic signed [ACC_W-1:0]   acc       [N_LANES]
);

  // ------------------------------------------------------------ block state
  // p_* describe the block whose quantization is on the unit's output.
  fp16_t     p_data [N_ELEM];
  fb4_elem_t p_w_elem [N_LANES][N_ELEM];
  fb4_meta_t p_w_meta [N_LANES];
  logic      p_first, p_last, p_decomp, p_seda, p_anchor, p_resid;

  logic      qu_valid;
  fb4_elem_t qu_elem [N_ELEM];
  fb4_meta_t qu_meta;
  range_t    qu_range;
  logic      qu_zero;

  fp16_t     delta [N_ELEM];
  logic      resid_pass;   // this cycle the residual enters the unit
  logic      accept;
  logic      decomp_now;

  assign resid_pass = qu_valid && p_decomp && !p_resid;
  assign in_ready   = !resid_pass;
  assign accept     = in_valid && in_ready;

  always_comb begin
    unique case (decomp_mode)
      DECOMP_ALL:     decomp_now = 1'b1;
      DECOMP_SALIENT: decomp_now = (in_token == salient_token);
      default:        decomp_now = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_first  <= 1'b0;
      p_last   <= 1'b0;
      p_decomp <= 1'b0;
      p_seda   <= 1'b0;
      p_anchor <= 1'b0;
      p_resid  <= 1'b0;
      for (int i = 0; i < N_ELEM; i++) p_data[i] <= '0;
      for (int l = 0; l < N_LANES; l++) begin
        p_w_meta[l] <= '0;
        for (int i = 0; i < N_ELEM; i++) p_w_elem[l][i] <= '0;
      end
    end else if (accept) begin
      p_first  <= in_first;
      p_last   <= in_last;
      p_decomp <= decomp_now;
      p_seda   <= in_seda;
      p_anchor <= in_anchor;
      p_resid  <= 1'b0;
      p_data   <= in_data;
      p_w_elem <= w_elem;
      p_w_meta <= w_meta;
    end else if (resid_pass) begin
      p_resid  <= 1'b1;
    end
  end

  // ------------------------------------------------------ quantization unit
  fp16_t qin_data [N_ELEM];
  logic  qin_valid, qin_seda;
  did_t  subfb_i [NRANGE];

  always_comb begin
    qin_data  = resid_pass ? delta : in_data;
    qin_valid = resid_pass || accept;
    qin_seda  = resid_pass ? p_seda : in_seda;
  end

  fb4_quant_unit #(
    .N_ELEM (N_ELEM),
    .N_GRP  (N_GRP)
  ) u_quant (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (qin_valid),
    .in_data   (qin_data),
    .seda_en   (qin_seda),
    .subfb     (subfb_i),
    .out_valid (qu_valid),
    .out_elem  (qu_elem),
    .out_meta  (qu_meta),
    .out_range (qu_range),
    .out_zero  (qu_zero)
  );

  fb4_residual #(
    .N_ELEM (N_ELEM)
  ) u_resid (
    .x     (p_data),
    .q     (qu_elem),
    .meta  (qu_meta),
    .delta (delta)
  );

  // -------------------------------------------------------------- SeDA
  seda_subfb_builder u_seda (
    .clk          (clk),
    .rst_n        (rst_n),
    .clear        (prof_clear),
    .sample_valid (qu_valid && p_anchor && !p_resid && !qu_zero),
    .sample_did   (qu_meta.did),
    .build        (prof_build),
    .subfb        (subfb_i),
    .subfb_valid  (subfb_valid)
  );
  assign subfb = subfb_i;

  // ------------------------------------------------- salient-token choice
  logic [TOK_W-1:0]        sel_token;
  logic                    sel_valid;
  logic signed [SUM_W-1:0] sel_sum;

  salient_token_selector #(
    .N_TOK   (N_TOK),
    .N_NB    (N_NB),
    .SCORE_W (SCORE_W)
  ) u_salient (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sc_valid),
    .in_first  (sc_first),
    .mode      (sc_mode),
    .in_score  (sc_score),
    .out_valid (sel_valid),
    .out_token (sel_token),
    .out_sum   (sel_sum)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)         salient_token <= '0;
    else if (sel_valid) salient_token <= sel_token;
  end
  assign salient_valid = sel_valid;

  always_ff @(posedge clk) begin
    if (!rst_n)         salient_sum <= '0;
    else if (sel_valid) salient_sum <= sel_sum;
  end

  // ----------------------------------------------------------------- MAC
  logic mac_last;

  assign mac_last = p_last && (p_resid || !p_decomp);

  fb4_mac #(
    .N_LANES  (N_LANES),
    .N_ELEM   (N_ELEM),
    .ACC_W    (ACC_W),
    .ACC_FRAC (ACC_FRAC)
  ) u_mac (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (qu_valid),
    .in_clear  (p_first && !p_resid),
    .in_last   (mac_last),
    .a_elem    (qu_elem),
    .a_meta    (qu_meta),
    .w_elem    (p_w_elem),
    .w_meta    (p_w_meta),
    .acc       (acc),
    .acc_valid (acc_update),
    .acc_last  (out_valid)
  );

  // ---------------------------------------------- quantized block output
  assign q_valid    = qu_valid;
  assign q_elem     = qu_elem;
  assign q_meta     = qu_meta;
  assign q_range    = qu_range;
  assign q_residual = p_resid;

  // The residual pass always directly follows its A pass.
  logic resid_pass_d;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      resid_pass_d <= 1'b0;
    end else begin
      resid_pass_d <= resid_pass;
      if (resid_pass_d)
        assert (qu_valid && p_resid)
          else $error("residual pass did not follow its A pass");
    end
  end

endmodule
