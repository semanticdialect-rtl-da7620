// salient_token_selector -- picks the salient token of a tile from attention
// scores.
//
// Activation decomposition of a matrix activation is applied to one token per
// tile only: the token whose pre-softmax attention scores (Q.K^T) to its local
// neighbourhood are largest on average. Scores are transformed first: ReLU for
// temporal attention (only positive links count), ABS for spatial or 3D
// attention (similarity and contrast both count), or left raw.
//
// How: the tile's N_TOK tokens arrive one per cycle (in_valid), each with its
// N_NB outgoing scores to its neighbours. The transformed scores are summed
// (the sum ranks tokens exactly as the mean does, since N_NB is fixed) and
// compared with the best sum so far; the first token with the largest sum
// wins. After the N_TOK-th token the winner's position in the tile appears on
// out_token with a one-cycle out_valid pulse, together with its score sum.
// in_first restarts a tile.
//
// From the paper: mean outgoing pre-softmax score, ReLU/ABS transforms, one
// token per 4x4 tile (N_TOK = 16). This design's own choices: the neighbour
// count N_NB (the paper does not size the neighbourhood), score width,
// one-token-per-cycle streaming and the tie break.
module salient_token_selector
  import fb4_pkg::*;
#(
  parameter int unsigned N_TOK   = 16,
  parameter int unsigned N_NB    = 16,
  parameter int unsigned SCORE_W = 16,
  localparam int SUM_W = SCORE_W + $clog2(N_NB) + 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic                           in_first,
  input  score_mode_t                    mode,
  input  logic signed [SCORE_W-1:0]      in_score [N_NB],
  output logic                           out_valid,
  output logic [$clog2(N_TOK)-1:0]       out_token,
  output logic signed [SUM_W-1:0]        out_sum
);

  localparam int TOK_W = $clog2(N_TOK);

  logic signed [SUM_W-1:0] tok_sum;

  always_comb begin
    tok_sum = '0;
    for (int k = 0; k < N_NB; k++) begin
      logic signed [SUM_W-1:0] s;
      s = SUM_W'(in_score[k]);
      unique case (mode)
        SCORE_RELU: if (s < 0) s = '0;
        SCORE_ABS:  if (s < 0) s = -s;
        default:    ;
      endcase
      tok_sum = tok_sum + s;
    end
  end

  logic [TOK_W-1:0]        tok_cnt;
  logic [TOK_W-1:0]        best_tok;
  logic signed [SUM_W-1:0] best_sum;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tok_cnt   <= '0;
      best_tok  <= '0;
      best_sum  <= '0;
      out_valid <= 1'b0;
      out_token <= '0;
      out_sum   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        logic [TOK_W-1:0]        pos;
        logic                    take;
        pos  = in_first ? '0 : tok_cnt;
        take = (pos == '0) || (tok_sum > best_sum);
        if (take) begin
          best_tok <= pos;
          best_sum <= tok_sum;
        end
        if (pos == TOK_W'(N_TOK - 1)) begin
          tok_cnt   <= '0;
          out_valid <= 1'b1;
          out_token <= take ? pos : best_tok;
          out_sum   <= take ? tok_sum : best_sum;
        end else begin
          tok_cnt <= pos + 1'b1;
        end
      end
    end
  end

endmodule
