// hmmd_quantizer -- non-uniform quantization of HMMD colours (block B).
//
// Maps one HMMD colour onto a histogram bin index with comparators only.
// First Diff is compared with the cut points 6, 20, 60 and 110, which picks
// one of five subspaces.  Inside subspace s, Hue is cut into H(s) equal
// sectors of the 360-degree circle and Sum into S(s) equal slices of 0..255;
// each cut is one comparison against a constant quantization level.  The
// bin index is  offset(s) + hue_level * S(s) + sum_level,  with the
// subspaces numbered one after another.  For the 256-bin operating point
// (H,S) = (1,32) (4,8) (16,4) (16,4) (16,4), giving bins 0-31, 32-63,
// 64-127, 128-191 and 192-255; the 128-bin point (BINS = 128) uses
// (1,16) (4,4) (8,4) (8,4) (8,4).  Inside a hue sector the bin number grows
// with Sum, as the numbering of the HMMD-slice figure shows (32..39 in
// subspace 1 at hue 0).  That figure labels the hue-0 cells of the last
// subspace 188..191, which would overlap subspace 3; this design follows the
// level table, which puts them at 192..195.
//
// Hue comes from the converter as 0..360 (360 only in the rounding corner of
// the red sector); 360 is the same angle as 0 and is folded onto it.  Max and
// Min are part of the HMMD input but the 256- and 128-bin points do not use
// them.
//
// Timing: one colour per cycle; `out_valid`/`bin` follow `in_valid`/`hmmd`
// one clock later (registered output).
module hmmd_quantizer
  import csd_pkg::*;
#(
  parameter int unsigned BINS = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  hmmd_t                   hmmd,
  output logic                    out_valid,
  output logic [$clog2(BINS)-1:0] bin
);

  localparam int unsigned BIN_W = $clog2(BINS);

  logic [2:0]       sub;
  logic [HUE_W-1:0] hue;
  logic [4:0]       hq, sq;     // up to 16 hue and 32 sum levels
  logic [BIN_W-1:0] bin_d;

  always_comb begin
    // subspace from Diff
    if      (hmmd.diff < CH_W'(CUT1)) sub = 3'd0;
    else if (hmmd.diff < CH_W'(CUT2)) sub = 3'd1;
    else if (hmmd.diff < CH_W'(CUT3)) sub = 3'd2;
    else if (hmmd.diff < CH_W'(CUT4)) sub = 3'd3;
    else                              sub = 3'd4;

    hue = (hmmd.hue >= HUE_W'(360)) ? hmmd.hue - HUE_W'(360) : hmmd.hue;

    // level = number of quantization levels the value reaches
    hq = '0;
    sq = '0;
    bin_d = '0;
    for (int unsigned s = 0; s < 5; s++) begin
      if (sub == 3'(s)) begin
        for (int unsigned k = 1; k < 16; k++)
          if (k < hue_levels(BINS, s) &&
              hue >= HUE_W'((360 * k + hue_levels(BINS, s) - 1) / hue_levels(BINS, s))) hq = hq + 1'b1;
        for (int unsigned k = 1; k < 32; k++)
          if (k < sum_levels(BINS, s) &&
              hmmd.sum >= CH_W'((256 * k) / sum_levels(BINS, s))) sq = sq + 1'b1;
        bin_d = BIN_W'(sub_offset(BINS, s)) + BIN_W'(hq) * BIN_W'(sum_levels(BINS, s)) + BIN_W'(sq);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      bin       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) bin <= bin_d;
    end
  end

  logic unused_minmax;
  assign unused_minmax = ^{hmmd.max, hmmd.min};

  initial begin
    assert (BINS == 256 || BINS == 128)
      else $error("hmmd_quantizer: only the 256- and 128-bin operating points are provided");
  end

endmodule
