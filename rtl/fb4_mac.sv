// fb4_mac -- the FB4 MAC of a processing element: N_LANES lanes in parallel.
//
// One activation block is broadcast to all lanes; each lane has its own
// weight block (for instance one output row each) and its own formatbook, and
// keeps its own accumulator. Every cycle each lane performs one block-wise
// (N_ELEM-element) multiply-accumulate, so the unit does N_LANES * N_ELEM
// 4-bit multiplies per cycle.
//
// Interface and timing are those of fb4_mac_lane, replicated: results two
// cycles after in_valid, acc_valid/acc_last common to all lanes.
// From the paper: 8 lanes, block size 16, per-lane formatbook. This design's
// own choices: broadcast activation with per-lane weights, and the
// accumulator format (see fb4_mac_lane).
module fb4_mac
  import fb4_pkg::*;
#(
  parameter int unsigned N_LANES  = fb4_pkg::NLANES,
  parameter int unsigned N_ELEM   = fb4_pkg::BLK,
  parameter int unsigned ACC_W    = 64,
  parameter int unsigned ACC_FRAC = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_clear,
  input  logic                    in_last,
  input  fb4_elem_t               a_elem [N_ELEM],
  input  fb4_meta_t               a_meta,
  input  fb4_elem_t               w_elem [N_LANES][N_ELEM],
  input  fb4_meta_t               w_meta [N_LANES],
  output logic signed [ACC_W-1:0] acc    [N_LANES],
  output logic                    acc_valid,
  output logic                    acc_last
);

  logic lane_valid [N_LANES];
  logic lane_last  [N_LANES];

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    fb4_mac_lane #(
      .N_ELEM   (N_ELEM),
      .ACC_W    (ACC_W),
      .ACC_FRAC (ACC_FRAC)
    ) u_lane (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .in_clear  (in_clear),
      .in_last   (in_last),
      .a_elem    (a_elem),
      .a_meta    (a_meta),
      .w_elem    (w_elem[l]),
      .w_meta    (w_meta[l]),
      .acc       (acc[l]),
      .acc_valid (lane_valid[l]),
      .acc_last  (lane_last[l])
    );
  end

  // All lanes run in lock step; lane 0 speaks for them.
  assign acc_valid = lane_valid[0];
  assign acc_last  = lane_last[0];

endmodule
