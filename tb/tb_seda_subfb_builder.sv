// tb_seda_subfb_builder -- self-checking test of seda_subfb_builder.
//
// Several profiling periods: random dialect IDs are sampled with a skewed
// distribution, then build is pulsed and the eight entries are compared with
// a reference that counts the samples and picks, per dynamic range, the most
// frequent dialect (lowest ID on a tie, first dialect of the range if none
// was seen). Also checks the reset contents, that clear restarts the counts,
// that subfb holds between builds, and that every entry lies in its range.
module tb_seda_subfb_builder;
  import fb4_pkg::*;

  logic clk = 1'b0, rst_n, clear, sample_valid, build;
  did_t sample_did;
  did_t subfb [NRANGE];
  logic subfb_valid;
  int checks = 0, failures = 0;

  seda_subfb_builder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  int cnt [NDIALECT];

  function automatic did_t ref_best(input int r);
    int b, bc;
    b  = RANGE_BASE[r];
    bc = cnt[b];
    for (int d = RANGE_BASE[r] + 1; d < RANGE_BASE[r] + RANGE_CNT[r]; d++)
      if (cnt[d] > bc) begin
        bc = cnt[d];
        b  = d;
      end
    return did_t'(b);
  endfunction

  initial begin
    int n_nonfirst = 0;
    rst_n = 1'b0; clear = 1'b0; sample_valid = 1'b0; build = 1'b0; sample_did = '0;
    repeat (2) @(posedge clk);
    #1;
    for (int r = 0; r < NRANGE; r++)
      check(subfb[r] == did_t'(RANGE_BASE[r]), "reset contents");
    check(!subfb_valid, "not valid after reset");
    rst_n = 1'b1;
    for (int period = 0; period < 40; period++) begin
      int    n;
      did_t  fav [NRANGE];
      @(negedge clk);
      clear = 1'b1;
      foreach (cnt[d]) cnt[d] = 0;
      @(negedge clk);
      clear = 1'b0;
      for (int r = 0; r < NRANGE; r++)
        fav[r] = did_t'(RANGE_BASE[r] + int'($urandom_range(RANGE_CNT[r] - 1, 0)));
      n = (period == 5) ? 0 : int'($urandom_range(300, 20));
      for (int k = 0; k < n; k++) begin
        int r;
        did_t d;
        @(negedge clk);
        r = int'($urandom_range(NRANGE - 1, 0));
        if ($urandom_range(2, 0) == 0)
          d = did_t'(RANGE_BASE[r] + int'($urandom_range(RANGE_CNT[r] - 1, 0)));
        else
          d = fav[r];
        sample_valid = ($urandom_range(5, 0) != 0);
        sample_did   = d;
        if (sample_valid) cnt[d]++;
      end
      @(negedge clk);
      sample_valid = 1'b0;
      build = 1'b1;
      @(negedge clk);
      build = 1'b0;
      check(subfb_valid, "valid after build");
      for (int r = 0; r < NRANGE; r++) begin
        check(subfb[r] == ref_best(r), $sformatf("period %0d range %0d: %0d vs %0d",
              period, r, subfb[r], ref_best(r)));
        check(int'(range_of(subfb[r])) == r, "entry in its range");
        if (subfb[r] != did_t'(RANGE_BASE[r])) n_nonfirst++;
      end
      // holds while new samples arrive
      @(negedge clk);
      sample_valid = 1'b1;
      sample_did   = did_t'(RANGE_BASE[3] + 1);
      @(negedge clk);
      sample_valid = 1'b0;
      for (int r = 0; r < NRANGE; r++)
        check(subfb[r] == ref_best(r), "holds until next build");
    end
    check(n_nonfirst > 50, "non-default entries were chosen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
