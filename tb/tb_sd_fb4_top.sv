// tb_sd_fb4_top -- end-to-end test of sd_fb4_top at its default parameters.
//
// Runs linear-layer dot products through the whole path (online FB4
// quantization of FP16 activation blocks, 8-lane FB4 MAC with offline-
// quantized weights) in five phases:
//   1. plain FB4, back to back: one block per cycle, no stalls;
//   2. activation decomposition of every block (vector activations):
//      Q(A) and Q(Delta) both accumulated, one stall cycle per block;
//   3. salient-token decomposition: attention-score tiles pick the salient
//      token, only its blocks are decomposed;
//   4. SeDA profiling on anchor blocks, sub-formatbook build, then blocks
//      quantized under the sub-formatbook;
//   5. SeDA and decomposition together (both passes constrained);
//   6. long dot products of the largest activations and weights, which
//      drive the accumulators into saturation (positive and negative).
// Expected results come from the reference model in fb4_ref_pkg (real
// arithmetic quantizer, 128-bit integer dot products); the quantized stream,
// the residual flag, the sub-formatbook, the salient token and every lane's
// accumulator are compared exactly. Activation data keep every non-zero
// element within 1/8 of the block maximum, where the residual is exact.
// Each mechanism (stall, decomposition, salient selection, SeDA profiling,
// SeDA constraint, zero-block flush, accumulator saturation) is counted and
// must occur.
module tb_sd_fb4_top;
  import fb4_pkg::*;
  import fb4_ref_pkg::*;

  localparam int L = NLANES, ACC_W = 64, ACC_FRAC = 24;
  localparam int N_TOK = 16, N_NB = 16, SCORE_W = 16;
  localparam int TOK_W = $clog2(N_TOK);
  localparam int SUM_W = SCORE_W + $clog2(N_NB) + 1;

  logic clk = 1'b0, rst_n;
  decomp_mode_t decomp_mode;
  logic in_valid, in_ready, in_first, in_last, in_seda, in_anchor;
  fp16_t in_data [BLK];
  logic [TOK_W-1:0] in_token;
  fb4_elem_t w_elem [L][BLK];
  fb4_meta_t w_meta [L];
  logic prof_clear, prof_build;
  did_t subfb [NRANGE];
  logic subfb_valid;
  logic sc_valid, sc_first;
  score_mode_t sc_mode;
  logic signed [SCORE_W-1:0] sc_score [N_NB];
  logic [TOK_W-1:0] salient_token;
  logic signed [SUM_W-1:0] salient_sum;
  logic salient_valid;
  logic q_valid;
  fb4_elem_t q_elem [BLK];
  fb4_meta_t q_meta;
  range_t q_range;
  logic q_residual;
  logic acc_update, out_valid;
  logic signed [ACC_W-1:0] acc [L];

  int checks = 0, failures = 0;

  sd_fb4_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
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

  // ---------------------------------------------------------- scoreboards
  typedef struct {
    fb4_elem_t e [BLK];
    fb4_meta_t meta;
    bit        resid;
  } qexp_t;

  qexp_t exp_q [$];
  wide_t exp_acc [$];     // L entries per dot product
  int    n_stall = 0, n_resid = 0, n_seda_blk = 0, n_profiled = 0;
  int    n_salient = 0, n_zero = 0, n_dp = 0, n_sat = 0;
  bit    big = 1'b0;   // phase 6: largest activations and weights

  always @(posedge clk) begin
    if (rst_n && q_valid) begin
      qexp_t e;
      e = exp_q.pop_front();
      check(q_meta == e.meta, $sformatf("q meta did %0d exp %0d vs %0d %0d",
            q_meta.did, q_meta.exp, e.meta.did, e.meta.exp));
      check(q_residual == e.resid, "q_residual flag");
      for (int i = 0; i < BLK; i++)
        check(q_elem[i] == e.e[i], $sformatf("q elem %0d %h vs %h", i, q_elem[i], e.e[i]));
      if (q_residual) n_resid++;
    end
    if (rst_n && out_valid) begin
      n_dp++;
      for (int l = 0; l < L; l++) begin
        wide_t e;
        e = exp_acc.pop_front();
        check(wide_t'(acc[l]) == e, $sformatf("dp %0d lane %0d: %0d vs %0d", n_dp, l, acc[l], e));
      end
    end
    if (rst_n && salient_valid) n_salient++;
  end

  // ------------------------------------------------------------ reference
  did_t  ref_subfb [NRANGE];
  int    ref_cnt [NDIALECT];

  // Activation block whose non-zero elements lie within 1/8 of its maximum.
  function automatic void act_block(output fp16_t x [BLK], input bit zero);
    int top;
    top = big ? 30 : 6 + int'($urandom_range(22, 0));
    for (int i = 0; i < BLK; i++) begin
      x[i] = {1'($urandom), 5'(top - int'($urandom_range(2, 0))), 10'($urandom)};
      if ($urandom_range(7, 0) == 0) x[i] = '0;
      if (zero) x[i] = '0;
    end
  endfunction

  // Drive one block; returns once it has been accepted. Accumulates the
  // expected per-lane result in racc.
  task automatic send(input fp16_t x [BLK], input bit first, input bit last,
                      input int token, input bit seda, input bit anchor,
                      input bit decomp, inout wide_t racc [L]);
    fb4_elem_t we [L][BLK];
    fb4_meta_t wm [L];
    ref_q_t    qa, qd;
    qexp_t     e;
    fp16_t     dx [BLK];
    for (int l = 0; l < L; l++) begin
      fb4_elem_t t [BLK];
      fb4_meta_t m;
      rand_fb4(t, m, 8, 24);
      if (big) begin
        // same sign as the activation, largest magnitude: the sum grows
        // toward the accumulator limit
        for (int i = 0; i < BLK; i++) t[i] = '{sign: x[i][15] ^ l[0], idx: 3'd7};
        m = '{did: did_t'(NDIALECT - 1), exp: exp_t'(31)};
      end
      we[l] = t;
      wm[l] = m;
    end
    qa = ref_quant(x, seda, ref_subfb);
    e.e = qa.e; e.meta = qa.meta; e.resid = 1'b0;
    exp_q.push_back(e);
    if (qa.zero) n_zero++;
    if (seda) n_seda_blk++;
    if (anchor && !qa.zero) begin
      ref_cnt[qa.meta.did]++;
      n_profiled++;
    end
    for (int l = 0; l < L; l++) begin
      if (first) racc[l] = 0;
      racc[l] = sat(racc[l] + ref_term(qa.e, qa.meta, we[l], wm[l], ACC_FRAC), ACC_W);
      if (racc[l] == sat(wide_t'(1) <<< 100, ACC_W) || racc[l] == sat(-(wide_t'(1) <<< 100), ACC_W))
        n_sat++;
    end
    if (decomp) begin
      for (int i = 0; i < BLK; i++)
        dx[i] = real_to_fp16_trunc(fp16_to_real(x[i]) - deq(qa.e[i], qa.meta));
      qd = ref_quant(dx, seda, ref_subfb);
      e.e = qd.e; e.meta = qd.meta; e.resid = 1'b1;
      exp_q.push_back(e);
      for (int l = 0; l < L; l++)
        racc[l] = sat(racc[l] + ref_term(qd.e, qd.meta, we[l], wm[l], ACC_FRAC), ACC_W);
    end
    if (last)
      for (int l = 0; l < L; l++) exp_acc.push_back(racc[l]);
    @(negedge clk);
    in_data   = x;
    in_first  = first;
    in_last   = last;
    in_token  = TOK_W'(token);
    in_seda   = seda;
    in_anchor = anchor;
    w_elem    = we;
    w_meta    = wm;
    in_valid  = 1'b1;
    while (!in_ready) begin
      n_stall++;
      @(negedge clk);
    end
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  // Run n_dp_run dot products of random length.
  task automatic run_dps(input int n_dp_run, input int maxlen, input int mode_sel);
    wide_t racc [L];
    for (int d = 0; d < n_dp_run; d++) begin
      int len;
      len = big ? maxlen : int'($urandom_range(maxlen, 1));
      for (int b = 0; b < len; b++) begin
        fp16_t x [BLK];
        int    tok;
        bit    dec, seda, anch;
        act_block(x, $urandom_range(15, 0) == 0);
        tok  = int'($urandom_range(N_TOK - 1, 0));
        seda = 1'b0;
        anch = 1'b0;
        case (mode_sel)
          1: dec = 1'b1;
          2: dec = (tok == int'(salient_token));
          3: anch = 1'b1;
          4: seda = ($urandom_range(1, 0) == 1);
          5: begin seda = 1'b1; dec = 1'b1; end
          default: dec = 1'b0;
        endcase
        if (mode_sel != 1 && mode_sel != 2 && mode_sel != 5) dec = 1'b0;
        send(x, b == 0, b == len - 1, tok, seda, anch, dec, racc);
      end
    end
    idle();
    repeat (6) @(posedge clk);
  endtask

  // Feed one tile of attention scores; returns the expected salient token.
  task automatic score_tile(input score_mode_t m, output int bt);
    longint best;
    best = -(64'sd1 <<< 40);
    bt   = 0;
    for (int j = 0; j < N_TOK; j++) begin
      longint s;
      @(negedge clk);
      sc_valid = 1'b1;
      sc_first = (j == 0);
      sc_mode  = m;
      s = 0;
      for (int k = 0; k < N_NB; k++) begin
        longint v;
        sc_score[k] = SCORE_W'($urandom);
        v = longint'(sc_score[k]);
        if (m == SCORE_RELU && v < 0) v = 0;
        if (m == SCORE_ABS && v < 0) v = -v;
        s += v;
      end
      if (s > best) begin
        best = s;
        bt   = j;
      end
    end
    @(negedge clk);
    sc_valid = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    int bt, stall0, resid0;
    rst_n = 1'b0;
    decomp_mode = DECOMP_OFF;
    in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0; in_seda = 1'b0; in_anchor = 1'b0;
    in_token = '0;
    for (int i = 0; i < BLK; i++) in_data[i] = '0;
    for (int l = 0; l < L; l++) begin
      w_meta[l] = '0;
      for (int i = 0; i < BLK; i++) w_elem[l][i] = '0;
    end
    prof_clear = 1'b0; prof_build = 1'b0;
    sc_valid = 1'b0; sc_first = 1'b0; sc_mode = SCORE_ABS;
    for (int k = 0; k < N_NB; k++) sc_score[k] = '0;
    for (int r = 0; r < NRANGE; r++) ref_subfb[r] = did_t'(RANGE_BASE[r]);
    foreach (ref_cnt[d]) ref_cnt[d] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. plain FB4: 1 block per cycle, no stall
    stall0 = n_stall;
    run_dps(40, 8, 0);
    check(n_stall == stall0, "no stall without decomposition");
    $display("phase 1 done");

    // 2. decompose every block: exactly one stall per block
    decomp_mode = DECOMP_ALL;
    stall0 = n_stall;
    resid0 = n_resid;
    run_dps(30, 6, 1);
    // the last block's stall falls after the input went idle
    check(n_stall - stall0 == n_resid - resid0 - 1,
          $sformatf("one stall per decomposed block: %0d vs %0d", n_stall - stall0, n_resid - resid0));
    $display("phase 2 done");

    // 3. salient-token decomposition, ABS (spatial) then ReLU (temporal)
    decomp_mode = DECOMP_SALIENT;
    for (int t = 0; t < 6; t++) begin
      score_tile((t % 2 == 0) ? SCORE_ABS : SCORE_RELU, bt);
      check(int'(salient_token) == bt, $sformatf("salient token %0d vs %0d", salient_token, bt));
      resid0 = n_resid;
      run_dps(8, 8, 2);
    end
    decomp_mode = DECOMP_OFF;
    $display("phase 3 done");

    // 4. SeDA: profile anchors, build, constrain
    @(negedge clk);
    prof_clear = 1'b1;
    @(negedge clk);
    prof_clear = 1'b0;
    foreach (ref_cnt[d]) ref_cnt[d] = 0;
    run_dps(30, 8, 3);
    @(negedge clk);
    prof_build = 1'b1;
    @(negedge clk);
    prof_build = 1'b0;
    for (int r = 0; r < NRANGE; r++) begin
      int b, bc;
      b  = RANGE_BASE[r];
      bc = ref_cnt[b];
      for (int d = RANGE_BASE[r] + 1; d < RANGE_BASE[r] + RANGE_CNT[r]; d++)
        if (ref_cnt[d] > bc) begin bc = ref_cnt[d]; b = d; end
      ref_subfb[r] = did_t'(b);
      check(subfb[r] == ref_subfb[r], $sformatf("subfb[%0d] %0d vs %0d", r, subfb[r], b));
    end
    check(subfb_valid, "sub-formatbook valid");
    run_dps(30, 8, 4);
    $display("phase 4 done");

    // 5. SeDA together with decomposition
    decomp_mode = DECOMP_ALL;
    run_dps(20, 6, 5);
    decomp_mode = DECOMP_OFF;
    $display("phase 5 done");

    // 6. accumulator saturation: long dot products of the largest values,
    // positive on even lanes and negative on odd lanes
    big = 1'b1;
    run_dps(2, 40, 0);
    run_dps(4, 1, 0);
    big = 1'b0;
    $display("phase 6 done");

    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "all quantized blocks seen");
    check(exp_acc.size() == 0, "all dot products seen");
    check(n_stall > 0,    $sformatf("stalls: %0d", n_stall));
    check(n_resid > 0,    $sformatf("residual passes: %0d", n_resid));
    check(n_salient > 0,  $sformatf("salient selections: %0d", n_salient));
    check(n_profiled > 0, $sformatf("profiled anchor blocks: %0d", n_profiled));
    check(n_seda_blk > 0, $sformatf("SeDA-constrained blocks: %0d", n_seda_blk));
    check(n_zero > 0,     $sformatf("flushed zero blocks: %0d", n_zero));
    check(n_sat > 0,      $sformatf("saturated accumulations: %0d", n_sat));
    $display("stalls %0d residual %0d salient %0d profiled %0d seda %0d zero %0d saturated %0d dot products %0d",
             n_stall, n_resid, n_salient, n_profiled, n_seda_blk, n_zero, n_sat, n_dp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
