// fb4_formatbook -- the formatbook of one MAC lane.
//
// Given a 5-bit dialect ID, it returns the eight 4-bit magnitudes of that
// dialect. A lane's multipliers share this row and each picks its magnitude
// with its own 3-bit index, so one formatbook serves the whole lane, as in
// the paper. Each of the eight outputs is a separate 32-to-1 choice over the
// dialects; output 0 is the constant 0 in every dialect, so it costs no
// logic, which is the per-index optimisation the paper describes.
//
// Interface: did in, mag[0..7] out. Purely combinational, no clock.
// The table contents come from fb4_pkg::FORMATBOOK (this design's choice,
// see the package).
module fb4_formatbook
  import fb4_pkg::*;
(
  input  did_t did,
  output mag_t mag [8]
);

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      mag[i] = '0;
      for (int d = 0; d < NDIALECT; d++)
        if (did == did_t'(d)) mag[i] = FORMATBOOK[d][i];
    end
  end

endmodule
