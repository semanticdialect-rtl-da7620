// tb_fb4_quant_unit -- self-checking test of fb4_quant_unit.
//
// Streams random FP16 blocks (wide and narrow exponent spreads, zeros,
// all-zero blocks, blocks under the flush limit, subnormal blocks) into the
// unit, one per cycle with random gaps, and compares every output element,
// the dialect ID, the exponent code, the range and the zero flag with the
// real-arithmetic reference in fb4_ref_pkg. Part of the blocks are quantized
// with the SeDA constraint and a random sub-formatbook. It also checks the
// one-cycle latency and one-block-per-cycle rate, and that several dynamic
// ranges and several dialects were exercised.
module tb_fb4_quant_unit;
  import fb4_pkg::*;
  import fb4_ref_pkg::*;

  logic      clk = 1'b0;
  logic      rst_n;
  logic      in_valid;
  fp16_t     in_data [BLK];
  logic      seda_en;
  did_t      subfb [NRANGE];
  logic      out_valid;
  fb4_elem_t out_elem [BLK];
  fb4_meta_t out_meta;
  range_t    out_range;
  logic      out_zero;

  int checks = 0, failures = 0;

  fb4_quant_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  // expected results, in issue order
  ref_q_t exp_q [$];
  int     issue_cycle [$];
  int     cycle = 0;
  int     range_seen [NRANGE];
  int     did_seen [NDIALECT];

  always @(posedge clk) cycle <= cycle + 1;

  // monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      ref_q_t q;
      int     ic;
      q  = exp_q.pop_front();
      ic = issue_cycle.pop_front();
      check(cycle == ic + 1, $sformatf("latency: issued %0d, out %0d", ic, cycle));
      check(out_zero == q.zero, $sformatf("zero flag %0b vs %0b", out_zero, q.zero));
      check(out_meta == q.meta, $sformatf("meta did %0d exp %0d vs did %0d exp %0d",
            out_meta.did, out_meta.exp, q.meta.did, q.meta.exp));
      check(int'(out_range) == q.range_id, "range");
      for (int i = 0; i < BLK; i++)
        check(out_elem[i] == q.e[i], $sformatf("elem %0d: %h vs %h (did %0d)",
              i, out_elem[i], q.e[i], q.meta.did));
      if (!q.zero) begin
        range_seen[q.range_id]++;
        did_seen[q.meta.did]++;
      end
    end
  end

  initial begin
    int n_ranges, n_dids, back_to_back;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    seda_en  = 1'b0;
    for (int i = 0; i < BLK; i++) in_data[i] = '0;
    for (int r = 0; r < NRANGE; r++) subfb[r] = did_t'(RANGE_BASE[r]);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    back_to_back = 0;
    for (int n = 0; n < 3000; n++) begin
      fp16_t x [BLK];
      int    kind, spread;
      kind   = ($urandom_range(19, 0) == 0) ? int'($urandom_range(3, 1)) : 0;
      spread = ($urandom_range(1, 0) == 1) ? 2 : 12;
      rand_block(x, kind, spread);
      @(negedge clk);
      in_data  = x;
      in_valid = 1'b1;
      seda_en  = ($urandom_range(3, 0) == 0);
      for (int r = 0; r < NRANGE; r++)
        subfb[r] = did_t'(RANGE_BASE[r] + int'($urandom_range(RANGE_CNT[r] - 1, 0)));
      exp_q.push_back(ref_quant(x, seda_en, subfb));
      issue_cycle.push_back(cycle);
      if (n > 0 && issue_cycle[$] == issue_cycle[$-1] + 1) back_to_back++;
      if ($urandom_range(3, 0) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    check(exp_q.size() == 0, "all blocks came out");
    n_ranges = 0;
    n_dids   = 0;
    foreach (range_seen[r]) if (range_seen[r] > 0) n_ranges++;
    foreach (did_seen[d]) if (did_seen[d] > 0) n_dids++;
    check(n_ranges == NRANGE, $sformatf("ranges exercised: %0d", n_ranges));
    check(n_dids >= 24, $sformatf("dialects exercised: %0d", n_dids));
    check(back_to_back > 100, "blocks accepted on consecutive cycles");
    $display("ranges %0d dialects %0d back-to-back %0d", n_ranges, n_dids, back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
