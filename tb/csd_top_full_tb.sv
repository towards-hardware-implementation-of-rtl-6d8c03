// csd_top_full_tb -- one full-size frame through the CSD extractor at its
// default parameters: 120x80 pixels, ten BRAMs of 12x80, 8x8 structuring
// element, 256 bins, 29-cycle converter.
//
// A blocky colour image with some noise is sent without pauses.  All 256 raw
// totals and 8-bit values are compared with the reference model (3650
// element positions).  The frame time, from the first pixel to the last
// descriptor value, must fit the 25 frames-per-second budget at the
// 8.887 ns clock period reported for the original implementation:
// 1 / (25 * 8.887 ns) = 4,500,956 cycles.
module csd_top_full_tb;
  import csd_pkg::*;
  import csd_ref_pkg::*;

  localparam int IMG_W = 120, IMG_H = 80, N_BRAM = 10, SE = 8, BINS = 256;
  localparam int NWIN = N_BRAM * (IMG_H - SE + 1) * (IMG_W / N_BRAM - SE + 1);
  localparam int BUDGET = 4500956;

  logic clk = 0, rst_n = 0;
  logic pix_valid = 0, pix_ready;
  rgb_t pix_rgb;
  logic csd_valid, frame_done;
  logic [7:0] csd_bin, csd_value;
  logic [16:0] csd_hist;
  int checks = 0, failures = 0;
  int cyc = 0;

  csd_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2000000) @(posedge clk);
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

  int img_bins [];
  int exp_hist [];
  int t_first, t_last, n_out, px, nonzero;

  initial begin
    pix_rgb = '0;
    img_bins = new[IMG_W * IMG_H];
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int n = 0; n < IMG_W * IMG_H; n++) begin
          px = gen_pixel(0, n % IMG_W, n / IMG_W, 3);
          img_bins[n] = ref_pixel_bin((px >> 16) & 255, (px >> 8) & 255, px & 255, BINS);
          @(negedge clk);
          pix_rgb = '{r: 8'(px >> 16), g: 8'(px >> 8), b: 8'(px)};
          pix_valid = 1;
          do @(posedge clk); while (!pix_ready);
          if (n == 0) t_first = cyc;
        end
        @(negedge clk); pix_valid = 0;
      end
      begin
        n_out = 0; nonzero = 0;
        while (n_out < BINS) begin
          @(posedge clk);
          if (csd_valid) begin
            if (n_out == 0) ref_csd(img_bins, IMG_W, IMG_H, N_BRAM, SE, BINS, exp_hist);
            check("bin order", int'(csd_bin), n_out);
            check($sformatf("raw bin %0d", n_out), int'(csd_hist), exp_hist[n_out]);
            check($sformatf("csd bin %0d", n_out), int'(csd_value), exp_hist[n_out] * 255 / NWIN);
            if (csd_hist != 0) nonzero++;
            if (frame_done) t_last = cyc;
            n_out++;
          end
        end
      end
    join
    $display("frame time %0d cycles, %0d non-empty bins", t_last - t_first, nonzero);
    checks++;
    if (t_last - t_first > BUDGET) begin failures++; $display("FAIL frame exceeds 25 fps budget"); end
    checks++;
    if (nonzero < 4) begin failures++; $display("FAIL test image too uniform"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
