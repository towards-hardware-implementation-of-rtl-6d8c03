// csd_top -- MPEG-7 Color Structure Descriptor extractor, frame in, CSD out.
//
// A frame of IMG_W x IMG_H RGB pixels enters in raster order.  Each pixel is
// converted to HMMD (rgb2hmmd, LATENCY cycles per pixel), quantized to one of
// BINS colour bins (hmmd_quantizer) and written by the demultiplexer into one
// of N_BRAM block RAMs in turn (pixel_demux, bram_bank), so BRAM k receives
// image columns k, k+N_BRAM, ...  Once the frame is stored, one address
// generator (read_addr_gen) sweeps an SE x SE structuring element over all
// BRAMs at once; per BRAM a local histogram operator (lho) tracks which
// colours the element contains, and a colour-structure histogram
// (cs_histogram) adds one to every present colour at every element position.
// Finally the N_BRAM partial histograms are summed bin by bin (hist_merge)
// and each total is normalised to 8 bits (bin_quantizer).
//
// Each BRAM lane treats its sub-image on its own, as in the original
// partitioned scheme: the descriptor counts the (SH-SE+1)*(SW-SE+1) element
// positions inside each of the N_BRAM sub-images, NWIN in total, and no
// element spans two BRAMs.  This is what makes the N_BRAM-fold parallel
// sweep possible; it differs from the sequential MPEG-7 extraction, whose
// element moves over the whole image.
//
// Phases, one after another, for every frame:
//   LOAD   pix_ready follows the converter; IMG_W*IMG_H pixels are taken;
//   SCAN   the structuring elements sweep the BRAMs (lane histograms cleared
//          at its start);
//   OUTPUT the BINS totals stream out on csd_valid with the bin index, the
//          8-bit CSD value and the raw total; frame_done pulses with the
//          last one, and LOAD resumes.
// Timing per frame (defaults): 9600 * 29 cycles of LOAD, about 14,000 of
// SCAN and 256 * 27 of OUTPUT.  The phase sequencing and the interfaces are
// this design's choices.
module csd_top
  import csd_pkg::*;
#(
  parameter int unsigned IMG_W        = 120,
  parameter int unsigned IMG_H        = 80,
  parameter int unsigned N_BRAM       = 10,
  parameter int unsigned SE           = 8,
  parameter int unsigned BINS         = 256,
  parameter int unsigned HIST_W       = 17,
  parameter int unsigned CONV_LATENCY = 29
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // RGB pixel stream, raster order
  input  logic                    pix_valid,
  output logic                    pix_ready,
  input  rgb_t                    pix_rgb,
  // descriptor stream, bins in order 0 .. BINS-1
  output logic                    csd_valid,
  output logic [$clog2(BINS)-1:0] csd_bin,
  output logic [7:0]              csd_value,
  output logic [HIST_W-1:0]       csd_hist,
  output logic                    frame_done
);

  localparam int unsigned SW     = IMG_W / N_BRAM;       // columns per BRAM
  localparam int unsigned DEPTH  = SW * IMG_H;           // pixels per BRAM
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned BW     = $clog2(BINS);
  localparam int unsigned NPIX   = IMG_W * IMG_H;
  localparam int unsigned NWIN   = N_BRAM * (IMG_H - SE + 1) * (SW - SE + 1);
  localparam int unsigned PCW    = $clog2(NPIX + 1);

  typedef enum logic [1:0] {PH_LOAD, PH_SCAN, PH_OUTPUT} phase_e;
  phase_e phase;

  // ---------------------------------------------------------------- block A
  logic  conv_ready, conv_out_valid;
  hmmd_t conv_hmmd;
  logic [PCW-1:0] pix_cnt;

  assign pix_ready = conv_ready && phase == PH_LOAD && pix_cnt != PCW'(NPIX);

  rgb2hmmd #(.LATENCY(CONV_LATENCY)) u_conv (
    .clk, .rst_n,
    .in_valid(pix_valid && pix_ready), .in_ready(conv_ready), .rgb(pix_rgb),
    .out_valid(conv_out_valid), .hmmd(conv_hmmd)
  );

  // ---------------------------------------------------------------- block B
  logic          q_valid;
  logic [BW-1:0] q_bin;

  hmmd_quantizer #(.BINS(BINS)) u_quant (
    .clk, .rst_n,
    .in_valid(conv_out_valid), .hmmd(conv_hmmd),
    .out_valid(q_valid), .bin(q_bin)
  );

  // ---------------------------------------------------------------- block C
  logic [N_BRAM-1:0] we;
  logic [AW-1:0]     wa;
  logic [BW-1:0]     di;
  logic              loaded;
  logic              frame_clear;

  pixel_demux #(.N_BRAM(N_BRAM), .DEPTH(DEPTH), .DATA_W(BW)) u_demux (
    .clk, .rst_n, .clear(frame_clear),
    .in_valid(q_valid), .in_data(q_bin),
    .we, .wa, .di, .loaded
  );

  logic          gen_start, gen_busy, gen_rd_en, gen_acc, gen_done;
  logic [AW-1:0] gen_addr;
  lho_op_e       gen_op;

  read_addr_gen #(.SW(SW), .SH(IMG_H), .SE(SE)) u_agen (
    .clk, .rst_n, .start(gen_start), .busy(gen_busy),
    .rd_en(gen_rd_en), .rd_addr(gen_addr), .op(gen_op), .acc(gen_acc),
    .done(gen_done)
  );

  logic [AW-1:0] ra  [N_BRAM];
  logic [BW-1:0] do_ [N_BRAM];

  always_comb for (int k = 0; k < N_BRAM; k++) ra[k] = gen_addr;

  bram_bank #(.N_BRAM(N_BRAM), .DEPTH(DEPTH), .DATA_W(BW)) u_brams (
    .clk, .di, .wa, .we, .ra, .do_
  );

  // align the read tags with the BRAM data (1 clock) and the histogram
  // strobe with the updated presence bits (1 more clock)
  logic    rd_en_d1, acc_d1, acc_d2, done_d1, done_d2, done_d3;
  lho_op_e op_d1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_en_d1 <= 1'b0;
      op_d1    <= OP_ADD;
      acc_d1   <= 1'b0;
      acc_d2   <= 1'b0;
      done_d1  <= 1'b0;
      done_d2  <= 1'b0;
      done_d3  <= 1'b0;
    end else begin
      rd_en_d1 <= gen_rd_en;
      op_d1    <= gen_op;
      acc_d1   <= gen_acc;
      acc_d2   <= acc_d1;
      done_d1  <= gen_done;
      done_d2  <= done_d1;
      done_d3  <= done_d2;
    end
  end

  logic [BW-1:0]     merge_rd_bin;
  logic [HIST_W-1:0] lane_hist [N_BRAM];

  for (genvar k = 0; k < N_BRAM; k++) begin : g_lane
    logic [BINS-1:0] presence;

    lho #(.BINS(BINS), .SE(SE)) u_lho (
      .clk, .rst_n,
      .in_valid(rd_en_d1), .op(op_d1), .bin(do_[k]), .presence
    );

    cs_histogram #(.BINS(BINS), .HIST_W(HIST_W)) u_hist (
      .clk, .rst_n, .clear(gen_start), .acc(acc_d2), .presence,
      .rd_bin(merge_rd_bin), .rd_data(lane_hist[k])
    );
  end

  logic              merge_start, merge_busy, merge_valid, merge_ready, merge_done;
  logic [BW-1:0]     merge_bin;
  logic [HIST_W-1:0] merge_hist;

  hist_merge #(.N_BRAM(N_BRAM), .BINS(BINS), .HIST_W(HIST_W)) u_merge (
    .clk, .rst_n, .start(merge_start), .busy(merge_busy),
    .rd_bin(merge_rd_bin), .lane_data(lane_hist),
    .out_valid(merge_valid), .out_ready(merge_ready),
    .out_bin(merge_bin), .out_hist(merge_hist), .done(merge_done)
  );

  bin_quantizer #(.BINS(BINS), .HIST_W(HIST_W), .NWIN(NWIN), .OUT_W(8)) u_binq (
    .clk, .rst_n,
    .in_valid(merge_valid), .in_ready(merge_ready),
    .in_bin(merge_bin), .in_hist(merge_hist),
    .out_valid(csd_valid), .out_bin(csd_bin), .out_value(csd_value),
    .out_hist(csd_hist)
  );

  // ------------------------------------------------------ phase sequencing
  assign frame_done = csd_valid && csd_bin == BW'(BINS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= PH_LOAD;
      pix_cnt     <= '0;
      gen_start   <= 1'b0;
      merge_start <= 1'b0;
      frame_clear <= 1'b0;
    end else begin
      gen_start   <= 1'b0;
      merge_start <= 1'b0;
      frame_clear <= 1'b0;
      unique case (phase)
        PH_LOAD: begin
          if (pix_valid && pix_ready) pix_cnt <= pix_cnt + 1'b1;
          if (loaded) begin
            phase     <= PH_SCAN;
            gen_start <= 1'b1;
          end
        end
        PH_SCAN: if (done_d3) begin
          phase       <= PH_OUTPUT;
          merge_start <= 1'b1;
        end
        default: if (frame_done) begin
          phase       <= PH_LOAD;
          pix_cnt     <= '0;
          frame_clear <= 1'b1;
        end
      endcase
    end
  end

  logic unused_status;
  assign unused_status = ^{gen_busy, merge_busy, merge_done};

  initial begin
    assert (IMG_W % N_BRAM == 0)
      else $error("csd_top: IMG_W must be a multiple of N_BRAM");
    assert (NWIN < (1 << HIST_W))
      else $error("csd_top: HIST_W cannot hold %0d element positions", NWIN);
  end

endmodule
