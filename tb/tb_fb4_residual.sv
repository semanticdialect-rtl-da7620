// tb_fb4_residual -- self-checking test of fb4_residual.
//
// For random FP16 blocks the reference model quantizes the block (sometimes
// with a random, deliberately poor dialect so residuals get large) and the
// RTL returns Delta = x - Q(x) in FP16. Each Delta is compared with the
// real-valued difference: exactly (after truncation to FP16) for elements
// no smaller than 1/16 of the block scale, whose bits all fit the internal
// grid, and within one grid step plus one FP16 ulp for the rest.
module tb_fb4_residual;
  import fb4_pkg::*;
  import fb4_ref_pkg::*;

  fp16_t     x     [BLK];
  fb4_elem_t q     [BLK];
  fb4_meta_t meta;
  fp16_t     delta [BLK];
  int checks = 0, failures = 0;

  fb4_residual dut (.*);

  initial begin
    #10000000;
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

  initial begin
    int n_exact = 0, n_neg = 0, n_pos = 0, n_sub = 0;
    for (int n = 0; n < 4000; n++) begin
      fp16_t  xb [BLK];
      ref_q_t rq;
      did_t   sf [NRANGE];
      bit     seda;
      int     kind;
      kind = ($urandom_range(9, 0) == 0) ? 3 : 0;
      rand_block(xb, kind, ($urandom_range(1, 0) == 1) ? 3 : 14);
      for (int r = 0; r < NRANGE; r++)
        sf[r] = did_t'(RANGE_BASE[r] + int'($urandom_range(RANGE_CNT[r] - 1, 0)));
      seda = $urandom_range(1, 0);
      rq = ref_quant(xb, seda, sf);
      x    = xb;
      q    = rq.e;
      meta = rq.meta;
      #1;
      for (int i = 0; i < BLK; i++) begin
        real d_ref, d_rtl, e_blk, tol, ax;
        d_ref = fp16_to_real(xb[i]) - deq(rq.e[i], rq.meta);
        d_rtl = fp16_to_real(delta[i]);
        e_blk = pow2(int'(rq.meta.exp) - EXP_BIAS);
        ax    = fp16_to_real(xb[i]);
        if (ax < 0) ax = -ax;
        if (d_ref < 0) n_neg++;
        if (d_ref > 0) n_pos++;
        if (delta[i][14:10] == 5'd0 && delta[i][9:0] != 0) n_sub++;
        if (ax >= e_blk / 16.0 || ax == 0.0) begin
          n_exact++;
          check(delta[i] == real_to_fp16_trunc(d_ref),
                $sformatf("exact delta %0d: %h vs %h (x %h)", i, delta[i],
                          real_to_fp16_trunc(d_ref), xb[i]));
        end else begin
          tol = e_blk * pow2(-14) + (d_ref < 0 ? -d_ref : d_ref) * pow2(-10) + pow2(-24);
          check((d_rtl - d_ref) <= tol && (d_ref - d_rtl) <= tol,
                $sformatf("delta %0d: %g vs %g", i, d_rtl, d_ref));
        end
      end
    end
    check(n_exact > 1000 && n_neg > 1000 && n_pos > 1000 && n_sub > 10,
          $sformatf("coverage exact %0d neg %0d pos %0d subnormal %0d",
                    n_exact, n_neg, n_pos, n_sub));
    $display("exact %0d neg %0d pos %0d subnormal %0d", n_exact, n_neg, n_pos, n_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
