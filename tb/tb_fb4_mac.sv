// tb_fb4_mac -- self-checking test of fb4_mac (8 lanes).
//
// One random activation block per cycle is broadcast to all lanes while each
// lane gets its own random weight block. Every lane's accumulator is compared
// exactly with a 128-bit integer reference after every block, two cycles
// after the block went in, with blocks issued back to back (one block per
// lane per cycle).
module tb_fb4_mac;
  import fb4_pkg::*;
  import fb4_ref_pkg::*;

  localparam int L = NLANES, ACC_W = 64, ACC_FRAC = 24;

  logic clk = 1'b0, rst_n;
  logic in_valid, in_clear, in_last;
  fb4_elem_t a_elem [BLK];
  fb4_meta_t a_meta;
  fb4_elem_t w_elem [L][BLK];
  fb4_meta_t w_meta [L];
  logic signed [ACC_W-1:0] acc [L];
  logic acc_valid, acc_last;
  int checks = 0, failures = 0;

  fb4_mac dut (.*);

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

  typedef wide_t lanes_t [L];
  wide_t  exp_acc [$];   // L entries per block, lane 0 first
  bit     exp_last [$];
  int     cycle = 0, issue [$];
  int     distinct = 0;

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && acc_valid) begin
      check(cycle == issue.pop_front() + 2, "latency 2");
      check(acc_last == exp_last.pop_front(), "acc_last");
      for (int l = 0; l < L; l++)
      begin
        wide_t e;
        e = exp_acc.pop_front();
        check(wide_t'(acc[l]) == e, $sformatf("lane %0d: %0d vs %0d", l, acc[l], e));
      end
      if (acc[0] != acc[L-1]) distinct++;
    end
  end

  initial begin
    lanes_t ref_acc;
    rst_n = 1'b0; in_valid = 1'b0; in_clear = 1'b0; in_last = 1'b0;
    for (int i = 0; i < BLK; i++) a_elem[i] = '0;
    a_meta = '0;
    for (int l = 0; l < L; l++) begin
      w_meta[l] = '0;
      for (int i = 0; i < BLK; i++) w_elem[l][i] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int dp = 0; dp < 300; dp++) begin
      int len;
      len = int'($urandom_range(6, 1));
      for (int b = 0; b < len; b++) begin
        fb4_elem_t ae [BLK];
        fb4_meta_t am;
        @(negedge clk);
        rand_fb4(ae, am, 4, 28);
        a_elem = ae; a_meta = am;
        for (int l = 0; l < L; l++) begin
          fb4_elem_t we [BLK];
          fb4_meta_t wm;
          rand_fb4(we, wm, 4, 28);
          w_elem[l] = we; w_meta[l] = wm;
          if (b == 0) ref_acc[l] = 0;
          ref_acc[l] = sat(ref_acc[l] + ref_term(ae, am, we, wm, ACC_FRAC), ACC_W);
        end
        in_valid = 1'b1;
        in_clear = (b == 0);
        in_last  = (b == len - 1);
        for (int l = 0; l < L; l++) exp_acc.push_back(ref_acc[l]);
        exp_last.push_back(b == len - 1);
        issue.push_back(cycle);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    check(exp_acc.size() == 0, "all results seen");
    check(distinct > 100, "lanes compute different results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
