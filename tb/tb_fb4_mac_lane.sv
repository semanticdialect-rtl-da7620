// tb_fb4_mac_lane -- self-checking test of fb4_mac_lane.
//
// Random FB4 activation and weight blocks (all dialects, random exponents)
// are accumulated in dot products of random length. A reference written with
// 128-bit integers computes each block's scaled term and the saturating
// accumulation; the accumulator must match it exactly, two cycles after each
// block (latency check), at one block per cycle. A final run with the
// largest exponents checks saturation, and a sample is also checked against
// a real-valued dot product.
module tb_fb4_mac_lane;
  import fb4_pkg::*;
  import fb4_ref_pkg::*;

  localparam int ACC_W = 64, ACC_FRAC = 24;

  logic clk = 1'b0, rst_n;
  logic in_valid, in_clear, in_last;
  fb4_elem_t a_elem [BLK], w_elem [BLK];
  fb4_meta_t a_meta, w_meta;
  logic signed [ACC_W-1:0] acc;
  logic acc_valid, acc_last;
  int checks = 0, failures = 0;

  fb4_mac_lane dut (.*);

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

  wide_t exp_acc [$];
  bit    exp_last [$];
  real   exp_real [$];
  int    cycle = 0, issue [$];
  int    n_sat = 0;

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && acc_valid) begin
      wide_t e;
      real   rv;
      int    ic;
      e  = exp_acc.pop_front();
      rv = exp_real.pop_front();
      ic = issue.pop_front();
      check(wide_t'(acc) == e, $sformatf("acc %0d vs %0d", acc, e));
      check(acc_last == exp_last.pop_front(), "acc_last");
      check(cycle == ic + 2, "latency 2");
      if (rv > -1.0e6 && rv < 1.0e6) begin
        real got;
        got = real'(acc) / pow2(ACC_FRAC);
        check(got - rv < 1.0e-4 && rv - got < 1.0e-4, $sformatf("real %g vs %g", got, rv));
      end
      if (e == sat(e + 1, ACC_W) || e == sat(e - 1, ACC_W)) n_sat++;
    end
  end

  initial begin
    wide_t ref_acc;
    real   ref_r;
    rst_n = 1'b0; in_valid = 1'b0; in_clear = 1'b0; in_last = 1'b0;
    for (int i = 0; i < BLK; i++) begin a_elem[i] = '0; w_elem[i] = '0; end
    a_meta = '0; w_meta = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    ref_acc = 0;
    ref_r = 0.0;
    for (int dp = 0; dp < 400; dp++) begin
      int len, elo, ehi;
      len = (dp >= 390) ? 16 : int'($urandom_range(8, 1));
      elo = (dp >= 390) ? 31 : 6;
      ehi = (dp >= 390) ? 31 : 26;
      for (int b = 0; b < len; b++) begin
        fb4_elem_t ae [BLK], we [BLK];
        fb4_meta_t am, wm;
        real t;
        rand_fb4(ae, am, elo, ehi);
        rand_fb4(we, wm, elo, ehi);
        if (dp >= 390) begin
          am.did = 5'd31; wm.did = 5'd31;
          for (int i = 0; i < BLK; i++) begin ae[i] = 4'b0111; we[i] = 4'b0111; end
        end
        @(negedge clk);
        a_elem = ae; w_elem = we; a_meta = am; w_meta = wm;
        in_valid = 1'b1;
        in_clear = (b == 0);
        in_last  = (b == len - 1);
        if (b == 0) begin ref_acc = 0; ref_r = 0.0; end
        ref_acc = sat(ref_acc + ref_term(ae, am, we, wm, ACC_FRAC), ACC_W);
        t = 0.0;
        for (int i = 0; i < BLK; i++) t += deq(ae[i], am) * deq(we[i], wm);
        ref_r += t;
        exp_acc.push_back(ref_acc);
        exp_real.push_back(ref_r);
        exp_last.push_back(b == len - 1);
        issue.push_back(cycle);
        if ($urandom_range(4, 0) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
        end
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    check(exp_acc.size() == 0, "all results seen");
    check(n_sat > 0, "saturation reached");
    $display("saturated results %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
