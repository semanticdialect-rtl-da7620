// tb_fb4_formatbook -- self-checking test of fb4_formatbook.
//
// Applies every dialect ID and compares the eight magnitudes with the format
// rules the formatbook must meet: index 0 is 0, magnitudes rise strictly
// within a dialect, the last magnitude is the range's block maximum 8+r, and
// dialect IDs rise with the range, with fewer dialects in narrower ranges.
// The magnitudes are also compared one by one with a table written out here.
module tb_fb4_formatbook;
  import fb4_pkg::*;

  did_t did;
  mag_t mag [8];
  int   checks = 0, failures = 0;

  fb4_formatbook dut (.*);

  // The formatbook, written out as hex strings, one character per magnitude.
  string rows [NDIALECT] = '{
    "01234568", "01234678", "01234569", "01235679", "0123457a", "0123468a",
    "0124678a", "0123457b", "0123468b", "0123579b", "012468ab", "0123468c",
    "0123579c", "012468ac", "013579bc", "02468abc", "0123469d", "012357ad",
    "012468bd", "013579bd", "02468acd", "012357ae", "012468be", "013579ce",
    "02468ace", "02479bde", "012357af", "012469cf", "013579cf", "02468adf",
    "02479bdf", "03579bdf"};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int d = 0; d < NDIALECT; d++) begin
      int r;
      did = did_t'(d);
      #1;
      r = -1;
      for (int k = 0; k < NRANGE; k++)
        if (d >= RANGE_BASE[k] && d < RANGE_BASE[k] + RANGE_CNT[k]) r = k;
      check(r >= 0, $sformatf("dialect %0d belongs to a range", d));
      check(int'(range_of(did)) == r, $sformatf("range_of(%0d)", d));
      check(mag[0] == 4'd0, $sformatf("dialect %0d index 0", d));
      check(int'(mag[7]) == 8 + r, $sformatf("dialect %0d top %0d", d, mag[7]));
      for (int i = 1; i < 8; i++)
        check(mag[i] > mag[i-1], $sformatf("dialect %0d rising at %0d", d, i));
      for (int i = 0; i < 8; i++) begin
        int c;
        c = rows[d][i];
        c = (c >= "a") ? c - "a" + 10 : c - "0";
        check(int'(mag[i]) == c, $sformatf("dialect %0d idx %0d: %0d vs %0d", d, i, mag[i], c));
      end
    end
    for (int k = 1; k < NRANGE; k++)
      check(RANGE_CNT[k] >= RANGE_CNT[k-1], "fewer dialects for narrower ranges");
    check(RANGE_BASE[NRANGE-1] + RANGE_CNT[NRANGE-1] == NDIALECT, "32 dialects");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
