// tb_salient_token_selector -- self-checking test of salient_token_selector.
//
// Random tiles of 16 tokens, each with 16 signed neighbour scores, are
// streamed one token per cycle (with gaps) in the three score modes. The
// winner and its score sum are compared with a reference that averages the
// ReLU/ABS/raw-transformed scores in real arithmetic and takes the first
// maximum. The result must appear exactly one cycle after the last token.
// Some tiles are restarted early with in_first.
module tb_salient_token_selector;
  import fb4_pkg::*;

  localparam int N_TOK = 16, N_NB = 16, SCORE_W = 16;
  localparam int SUM_W = SCORE_W + $clog2(N_NB) + 1;

  logic clk = 1'b0, rst_n, in_valid, in_first;
  score_mode_t mode;
  logic signed [SCORE_W-1:0] in_score [N_NB];
  logic out_valid;
  logic [$clog2(N_TOK)-1:0] out_token;
  logic signed [SUM_W-1:0] out_sum;
  int checks = 0, failures = 0;

  salient_token_selector dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int n_out = 0;
  always @(posedge clk) if (rst_n && out_valid) n_out++;

  initial begin
    int n_tiles = 0, n_nonzero_win = 0;
    rst_n = 1'b0; in_valid = 1'b0; in_first = 1'b0; mode = SCORE_ABS;
    for (int k = 0; k < N_NB; k++) in_score[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      real best;
      int  bt, start;
      case (t % 3)
        0: mode = SCORE_ABS;
        1: mode = SCORE_RELU;
        default: mode = SCORE_RAW;
      endcase
      // an aborted partial tile first, sometimes
      start = 0;
      if ($urandom_range(4, 0) == 0) begin
        for (int j = 0; j < 5; j++) begin
          @(negedge clk);
          in_valid = 1'b1;
          in_first = (j == 0);
          for (int k = 0; k < N_NB; k++) in_score[k] = SCORE_W'($urandom);
        end
      end
      best = -1.0e30;
      bt   = 0;
      for (int j = 0; j < N_TOK; j++) begin
        real m;
        @(negedge clk);
        in_valid = 1'b1;
        in_first = (j == 0);
        m = 0.0;
        for (int k = 0; k < N_NB; k++) begin
          real s;
          in_score[k] = ($urandom_range(1, 0) == 1) ? SCORE_W'($urandom) :
                        SCORE_W'($urandom_range(200, 0) - 100);
          s = real'(in_score[k]);
          if (mode == SCORE_RELU && s < 0) s = 0.0;
          if (mode == SCORE_ABS && s < 0) s = -s;
          m += s / N_NB;
        end
        if (m > best) begin
          best = m;
          bt   = j;
        end
        if (j != N_TOK - 1 && $urandom_range(3, 0) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid == 1'b1, "result one cycle after the last token");
      check(int'(out_token) == bt, $sformatf("tile %0d winner %0d vs %0d", t, out_token, bt));
      check(real'(out_sum) == best * N_NB, "winning score sum");
      if (bt != 0) n_nonzero_win++;
      n_tiles++;
      @(negedge clk);
      check(out_valid == 1'b0, "single-cycle result pulse");
    end
    check(n_out == n_tiles, $sformatf("one result per tile: %0d vs %0d", n_out, n_tiles));
    check(n_nonzero_win > 300, "winners spread over the tile");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
