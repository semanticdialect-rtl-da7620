// seda_subfb_builder -- builds the 8-dialect SeDA sub-formatbook.
//
// Semantic-aware dialect assignment makes semantically related tokens share
// one sub-formatbook: one dialect per dynamic range (block maximum 8..15), so
// that blocks with different ranges still get a fitting dialect while the
// choice within a range is common to the whole group of tokens. The
// sub-formatbook is made by bin-count profiling: while anchor-token blocks
// are quantized freely, their chosen dialect IDs are counted, and for each
// range the dialect counted most often becomes that range's entry.
//
// How: one CNT_W-bit saturating counter per dialect (each dialect belongs to
// exactly one range, so per-dialect counts are the per-range bin counts).
// sample_valid/sample_did count one block. A one-cycle build pulse takes, for
// every range, the arg-max over that range's dialects (lowest ID on a tie, so
// a range never seen falls back to its first dialect) and registers the eight
// IDs in subfb; subfb_valid then stays high. clear zeroes the counters (a new
// profiling period); it wins over a sample in the same cycle.
//
// From the paper: counting per dialect and range on anchor tokens, the
// most-frequent-dialect rule, 8 entries. This design's own choices: counter
// width, tie break, the fallback for an unseen range, the reset contents
// (first dialect of each range).
// The dialects of one range share their upper ID bits, so a few bits of each
// subfb entry can only take one value; synthesis reports them as constant
// outputs. They stay in the port so that every entry is a full dialect ID.
module seda_subfb_builder
  import fb4_pkg::*;
#(
  parameter int unsigned CNT_W = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic sample_valid,
  input  did_t sample_did,
  input  logic build,
  output did_t subfb [NRANGE],
  output logic subfb_valid
);

  logic [CNT_W-1:0] cnt [NDIALECT];

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int d = 0; d < NDIALECT; d++) cnt[d] <= '0;
    end else if (sample_valid && cnt[sample_did] != '1) begin
      cnt[sample_did] <= cnt[sample_did] + 1'b1;
    end
  end

  did_t best [NRANGE];

  always_comb begin
    for (int r = 0; r < NRANGE; r++) begin
      logic [CNT_W-1:0] bc;
      best[r] = did_t'(RANGE_BASE[r]);
      bc      = cnt[RANGE_BASE[r]];
      for (int c = 1; c < RANGE_CNT[r]; c++)
        if (cnt[RANGE_BASE[r] + c] > bc) begin
          bc      = cnt[RANGE_BASE[r] + c];
          best[r] = did_t'(RANGE_BASE[r] + c);
        end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < NRANGE; r++) subfb[r] <= did_t'(RANGE_BASE[r]);
      subfb_valid <= 1'b0;
    end else if (build) begin
      subfb       <= best;
      subfb_valid <= 1'b1;
    end
  end

endmodule
