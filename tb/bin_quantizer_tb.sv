// bin_quantizer_tb -- self-checking test of the bin value normaliser.
//
// Sends bin values 0, NWIN, NWIN/2 and random values up to NWIN; each
// output must be floor(h*255/NWIN), carry the input's bin index and raw
// value, and appear HIST_W+OUT_W+2 cycles after the input was taken (a
// new input is accepted as soon as the previous result is out).
module bin_quantizer_tb;
  localparam int BINS = 256, HIST_W = 17, NWIN = 3650;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [7:0] in_bin, out_bin, out_value;
  logic [HIST_W-1:0] in_hist, out_hist;
  int checks = 0, failures = 0;

  bin_quantizer #(.BINS(BINS), .HIST_W(HIST_W), .NWIN(NWIN), .OUT_W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic send(int b, int h);
    int cyc;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_bin = 8'(b); in_hist = HIST_W'(h); in_valid = 1;
    @(posedge clk);
    #1 in_valid = 0; in_bin = 8'(b + 1); in_hist = '0;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!out_valid && cyc < 100);
    check($sformatf("latency bin %0d", b), cyc, HIST_W + 8 + 2);
    check($sformatf("value h=%0d", h), int'(out_value), (h * 255) / NWIN);
    check($sformatf("bin %0d", b), int'(out_bin), b);
    check($sformatf("raw %0d", b), int'(out_hist), h);
  endtask

  initial begin
    in_bin = 0; in_hist = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(0, 0); send(1, NWIN); send(2, NWIN / 2); send(3, 1); send(4, NWIN - 1);
    for (int b = 0; b < 1000; b++) send(b % BINS, $urandom_range(NWIN));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
