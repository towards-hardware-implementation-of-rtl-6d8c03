// cs_histogram_tb -- self-checking test of a lane colour-structure histogram.
//
// Random presence vectors are accumulated on random `acc` strobes, with a
// `clear` in the middle; after each phase every bin is read back through
// rd_bin/rd_data and compared with a reference count.
module cs_histogram_tb;
  localparam int BINS = 256, HIST_W = 17;

  logic clk = 0, rst_n = 0;
  logic clear = 0, acc = 0;
  logic [BINS-1:0] presence;
  logic [7:0] rd_bin;
  logic [HIST_W-1:0] rd_data;
  int checks = 0, failures = 0;
  int ref_h [BINS];

  cs_histogram #(.BINS(BINS), .HIST_W(HIST_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readback();
    for (int m = 0; m < BINS; m++) begin
      @(negedge clk);
      rd_bin = 8'(m);
      #1;
      checks++;
      if (int'(rd_data) != ref_h[m]) begin
        failures++;
        $display("FAIL bin %0d: got %0d expected %0d", m, rd_data, ref_h[m]);
      end
    end
  endtask

  task automatic accumulate(int n);
    for (int it = 0; it < n; it++) begin
      @(negedge clk);
      for (int w = 0; w < BINS / 32; w++) presence[w*32 +: 32] = $urandom & $urandom;
      acc = $urandom_range(3) != 0;
      if (acc) foreach (ref_h[m]) ref_h[m] += int'(presence[m]);
    end
    @(negedge clk); acc = 0;
  endtask

  initial begin
    foreach (ref_h[m]) ref_h[m] = 0;
    presence = '0; rd_bin = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    readback();
    accumulate(3000);
    readback();
    @(negedge clk); clear = 1; acc = 1; presence = '1;
    @(negedge clk); clear = 0; acc = 0;
    foreach (ref_h[m]) ref_h[m] = 0;
    readback();
    accumulate(500);
    readback();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
