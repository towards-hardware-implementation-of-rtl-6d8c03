// csd_top_tb -- end-to-end test of the CSD extractor at a reduced frame size.
//
// Frame 40x10 split over 10 BRAMs (4x10 sub-images), a 3x3 structuring
// element, 256 bins; a second instance with the 128-bin operating point is
// fed the same pixels and checked the same way.  Three frames go through
// back to back: a blocky image
// sent without gaps, random pixels sent with random gaps in pix_valid, and a
// uniform image.  For each frame the RGB pixels are turned into bins and the
// partitioned colour-structure histogram is computed by the reference
// model; all 256 raw totals and 8-bit values must match.  Checked timing:
// exactly CONV_LATENCY cycles between pixels when the source never pauses,
// and the sweep taking 2*SW*SE*(IMG_H-SE+1) cycles of reads (plus one from
// start to the first read).  Every mechanism of the
// design is counted and must occur: input stalls, converter results, hue
// folding at 360, all five HMMD subspaces, demultiplexer wrap, element
// positions, pixels leaving the element, lanes draining, merge stalls on
// the normaliser, a colour present at every position (value 255) and frame
// restarts.
module csd_top_tb;
  import csd_pkg::*;
  import csd_ref_pkg::*;

  localparam int IMG_W = 40, IMG_H = 10, N_BRAM = 10, SE = 3, BINS = 256, HIST_W = 17;
  localparam int LAT = 29;
  localparam int SW = IMG_W / N_BRAM;
  localparam int NWIN = N_BRAM * (IMG_H - SE + 1) * (SW - SE + 1);

  logic clk = 0, rst_n = 0;
  logic pix_valid = 0, pix_ready;
  rgb_t pix_rgb;
  logic csd_valid, frame_done;
  logic [7:0] csd_bin, csd_value;
  logic [HIST_W-1:0] csd_hist;
  int checks = 0, failures = 0;

  csd_top #(.IMG_W(IMG_W), .IMG_H(IMG_H), .N_BRAM(N_BRAM), .SE(SE), .BINS(BINS),
            .HIST_W(HIST_W), .CONV_LATENCY(LAT)) dut (.*);

  // the 128-bin operating point, fed the same pixels in lock step
  logic pix_ready128, csd_valid128, frame_done128;
  logic [6:0] csd_bin128;
  logic [7:0] csd_value128;
  logic [HIST_W-1:0] csd_hist128;

  csd_top #(.IMG_W(IMG_W), .IMG_H(IMG_H), .N_BRAM(N_BRAM), .SE(SE), .BINS(128),
            .HIST_W(HIST_W), .CONV_LATENCY(LAT)) dut128 (
    .clk, .rst_n, .pix_valid, .pix_ready(pix_ready128), .pix_rgb,
    .csd_valid(csd_valid128), .csd_bin(csd_bin128), .csd_value(csd_value128),
    .csd_hist(csd_hist128), .frame_done(frame_done128));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ------------------------------------------------ mechanism counters
  int n_stall, n_conv, n_hue360, n_wrap, n_pos, n_leave, n_drain, n_merge_stall, n_full, n_frames;
  int n_sub [5];
  int scan_start, scan_cycles, cyc;

  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (pix_valid && !pix_ready) n_stall++;
    if (dut.conv_out_valid) begin
      n_conv++;
      if (dut.conv_hmmd.hue == 360) n_hue360++;
      n_sub[(dut.conv_hmmd.diff < 6) ? 0 : (dut.conv_hmmd.diff < 20) ? 1 :
            (dut.conv_hmmd.diff < 60) ? 2 : (dut.conv_hmmd.diff < 110) ? 3 : 4]++;
    end
    if (dut.we[N_BRAM-1]) n_wrap++;
    if (dut.acc_d2) n_pos++;
    if (dut.gen_rd_en && dut.gen_op == OP_SUB) begin
      if (dut.u_agen.phase == 2'd2) n_drain++; else n_leave++;
    end
    if (dut.merge_valid && !dut.merge_ready) n_merge_stall++;
    if (csd_valid && csd_value == 8'd255) n_full++;
    if (frame_done) n_frames++;
    if (dut.gen_start) scan_start = cyc;
    if (dut.gen_done) scan_cycles = cyc - scan_start;
  end

  // ------------------------------------------------ one frame
  int img_bins [], img_bins128 [];
  int exp_hist [], exp_hist128 [];

  task automatic run_frame(int kind, bit gaps);
    int px, first_acc, last_acc, n_out, prev, seed;
    bit no_pause_ok;
    img_bins = new[IMG_W * IMG_H];
    img_bins128 = new[IMG_W * IMG_H];
    seed = $urandom_range(7);
    fork
      // source
      begin
        prev = -1; no_pause_ok = 1;
        for (int n = 0; n < IMG_W * IMG_H; n++) begin
          px = gen_pixel(kind, n % IMG_W, n / IMG_W, seed);
          img_bins[n] = ref_pixel_bin((px >> 16) & 255, (px >> 8) & 255, px & 255, BINS);
          img_bins128[n] = ref_pixel_bin((px >> 16) & 255, (px >> 8) & 255, px & 255, 128);
          @(negedge clk);
          while (gaps && $urandom_range(3) == 0) begin pix_valid = 0; @(negedge clk); end
          pix_rgb = '{r: 8'(px >> 16), g: 8'(px >> 8), b: 8'(px)};
          pix_valid = 1;
          do begin
            @(posedge clk);
            if (pix_ready128 != pix_ready) begin
              failures++; $display("FAIL 128-bin instance out of step");
            end
          end while (!pix_ready);
          if (!gaps && prev >= 0 && cyc - prev != LAT) no_pause_ok = 0;
          prev = cyc;
        end
        @(negedge clk); pix_valid = 0;
        if (!gaps) check("one pixel every CONV_LATENCY cycles", int'(no_pause_ok), 1);
      end
      // sink
      begin
        n_out = 0;
        while (n_out < BINS) begin
          @(posedge clk);
          if (csd_valid) begin
            if (n_out == 0) ref_csd(img_bins, IMG_W, IMG_H, N_BRAM, SE, BINS, exp_hist);
            check("bin order", int'(csd_bin), n_out);
            check($sformatf("raw bin %0d", n_out), int'(csd_hist), exp_hist[n_out]);
            check($sformatf("csd bin %0d", n_out), int'(csd_value), exp_hist[n_out] * 255 / NWIN);
            check("frame_done", int'(frame_done), int'(n_out == BINS - 1));
            n_out++;
          end
        end
      end
      // sink of the 128-bin instance
      begin
        int n128;
        n128 = 0;
        while (n128 < 128) begin
          @(posedge clk);
          if (csd_valid128) begin
            if (n128 == 0) ref_csd(img_bins128, IMG_W, IMG_H, N_BRAM, SE, 128, exp_hist128);
            check("bin order (128)", int'(csd_bin128), n128);
            check($sformatf("raw bin %0d (128)", n128), int'(csd_hist128), exp_hist128[n128]);
            check($sformatf("csd bin %0d (128)", n128), int'(csd_value128), exp_hist128[n128] * 255 / NWIN);
            check("frame_done (128)", int'(frame_done128), int'(n128 == 127));
            n128++;
          end
        end
      end
    join
    check("sweep cycles", scan_cycles, 2 * SW * SE * (IMG_H - SE + 1) + 1);
  endtask

  initial begin
    pix_rgb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(0, 0);
    run_frame(1, 1);
    run_frame(2, 1);
    repeat (2) @(posedge clk);
    check("frames", n_frames, 3);
    check("converter results", n_conv, 3 * IMG_W * IMG_H);
    check("element positions (all lanes at once)", n_pos, 3 * NWIN / N_BRAM);
    foreach (n_sub[s]) begin
      checks++; if (n_sub[s] == 0) begin failures++; $display("FAIL subspace %0d never seen", s); end
    end
    begin
      string names [9] = '{"input stall", "hue fold at 360", "demux wrap", "element position",
                           "pixel leaving element", "lane drain", "merge stall", "colour at every position",
                           "frame restart"};
      int counts [9];
      counts = '{n_stall, n_hue360, n_wrap, n_pos, n_leave, n_drain, n_merge_stall, n_full, n_frames - 1};
      foreach (names[i]) begin
        $display("mechanism %-26s %0d", names[i], counts[i]);
        checks++;
        if (counts[i] == 0) begin failures++; $display("FAIL mechanism never happened: %s", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
