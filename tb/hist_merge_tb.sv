// hist_merge_tb -- self-checking test of the histogram merge stage.
//
// Ten lane histograms are modelled in the testbench (lane_data answers
// rd_bin combinationally, like the lane counters).  The merged stream is
// taken with a randomly stalling out_ready; every bin must appear once, in
// order, with the sum of the ten lanes, and must hold while stalled.  The
// time per bin without stalls must be N_BRAM + 1 cycles, and `done` must
// follow the last bin.
module hist_merge_tb;
  localparam int N_BRAM = 10, BINS = 256, HIST_W = 17;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, out_valid, out_ready, done;
  logic [7:0] rd_bin, out_bin;
  logic [HIST_W-1:0] lane_data [N_BRAM];
  logic [HIST_W-1:0] out_hist;
  int checks = 0, failures = 0;
  int lanes [N_BRAM][BINS];

  hist_merge #(.N_BRAM(N_BRAM), .BINS(BINS), .HIST_W(HIST_W)) dut (.*);

  always_comb foreach (lane_data[k]) lane_data[k] = HIST_W'(lanes[k][rd_bin]);

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

  task automatic run(bit stall);
    int expect_bin, sum, cyc, last;
    foreach (lanes[k, m]) lanes[k][m] = $urandom_range(12000);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    expect_bin = 0; cyc = 0; last = 0;
    while (expect_bin < BINS) begin
      out_ready = stall ? ($urandom_range(2) == 0) : 1'b1;
      @(posedge clk);
      cyc++;
      if (out_valid && out_ready) begin
        sum = 0;
        for (int k = 0; k < N_BRAM; k++) sum += lanes[k][expect_bin];
        check($sformatf("bin index %0d", expect_bin), int'(out_bin), expect_bin);
        check($sformatf("bin %0d total", expect_bin), int'(out_hist), sum);
        if (!stall && expect_bin > 0) check("cycles per bin", cyc - last, N_BRAM + 1);
        last = cyc;
        expect_bin++;
      end
      #1;
    end
    @(negedge clk);
    check("done", int'(done), 1);
    out_ready = 0;
  endtask

  initial begin
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
