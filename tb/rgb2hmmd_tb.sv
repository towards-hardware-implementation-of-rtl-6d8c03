// rgb2hmmd_tb -- self-checking test of the RGB-to-HMMD converter.
//
// Drives the five pixels of the published converter waveform (their Max,
// Min, Sum and Diff are checked against the printed values), corner colours
// (greys, primaries, the red-sector wrap) and random pixels.  All outputs are
// compared with the integer reference model, and the latency from acceptance
// to out_valid must be exactly LATENCY cycles.
module rgb2hmmd_tb;
  import csd_pkg::*;
  import csd_ref_pkg::*;

  localparam int LATENCY = 29;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  rgb_t rgb;
  hmmd_t hmmd;
  int checks = 0, failures = 0;

  rgb2hmmd #(.LATENCY(LATENCY)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  task automatic convert(int r, int g, int b);
    ref_hmmd_t e;
    int cyc;
    e = ref_hmmd(r, g, b);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    rgb = '{r: 8'(r), g: 8'(g), b: 8'(b)};
    in_valid = 1;
    @(posedge clk);            // accepted here
    #1 in_valid = 0;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!out_valid && cyc < 100);
    check($sformatf("latency (%0d,%0d,%0d)", r, g, b), cyc, LATENCY);
    check($sformatf("hue (%0d,%0d,%0d)", r, g, b), int'(hmmd.hue), e.hue);
    check($sformatf("max (%0d,%0d,%0d)", r, g, b), int'(hmmd.max), e.max);
    check($sformatf("min (%0d,%0d,%0d)", r, g, b), int'(hmmd.min), e.min);
    check($sformatf("diff (%0d,%0d,%0d)", r, g, b), int'(hmmd.diff), e.diff);
    check($sformatf("sum (%0d,%0d,%0d)", r, g, b), int'(hmmd.sum), e.sum);
    check("ready with result", int'(in_ready), 1);
  endtask

  // pixels of the published waveform, with the printed max, min, sum, diff
  task automatic printed(int r, int g, int b, int mx, int mn, int sm, int df);
    convert(r, g, b);
    check("printed max", int'(hmmd.max), mx);
    check("printed min", int'(hmmd.min), mn);
    check("printed sum", int'(hmmd.sum), sm);
    check("printed diff", int'(hmmd.diff), df);
  endtask

  initial begin
    rgb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    printed(8'b00000111, 8'b00010111, 8'b00001111, 8'b00010111, 8'b00000111, 8'b00001111, 8'b00010000);
    printed(8'b01100111, 8'b01010111, 8'b00001101, 8'b01100111, 8'b00001101, 8'b00111010, 8'b01011010);
    printed(8'b01111111, 8'b00011111, 8'b00101111, 8'b01111111, 8'b00011111, 8'b01001111, 8'b01100000);
    printed(8'b00000111, 8'b00010111, 8'b01101110, 8'b01101110, 8'b00000111, 8'b00111010, 8'b01100111);
    printed(8'b00000100, 8'b01111100, 8'b00011111, 8'b01111100, 8'b00000100, 8'b01000000, 8'b01111000);
    convert(0, 0, 0);  convert(255, 255, 255);  convert(128, 128, 128);
    convert(255, 0, 0); convert(0, 255, 0); convert(0, 0, 255);
    convert(255, 255, 0); convert(0, 255, 255); convert(255, 0, 255);
    convert(255, 0, 1);  // red sector, G < B: hue just below 360
    convert(255, 0, 254); convert(10, 200, 5); convert(7, 23, 110);
    repeat (400) convert($urandom_range(255), $urandom_range(255), $urandom_range(255));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
