// hmmd_quantizer_tb -- self-checking test of the HMMD quantizer.
//
// Two instances, the 256-bin and the 128-bin operating point, see the same
// HMMD inputs.  Checked: the hue-0 cells printed on the HMMD-slice figure
// (bins 0..31, 32..39, 64..67, 128..131), a sweep over every Diff and Sum
// value with random hues, every hue 0..360 at each subspace, and random
// inputs; each against the multiply/divide reference model.  The output
// must follow the input by exactly one clock.
module hmmd_quantizer_tb;
  import csd_pkg::*;
  import csd_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, v256, v128;
  hmmd_t hmmd;
  logic [7:0] bin256;
  logic [6:0] bin128;
  int checks = 0, failures = 0;

  hmmd_quantizer #(.BINS(256)) dut256 (.clk, .rst_n, .in_valid, .hmmd, .out_valid(v256), .bin(bin256));
  hmmd_quantizer #(.BINS(128)) dut128 (.clk, .rst_n, .in_valid, .hmmd, .out_valid(v128), .bin(bin128));

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
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

  // apply one input for one clock and check both outputs one clock later
  task automatic apply(int hue, int diff, int sum, int exp256 = -1);
    @(negedge clk);
    hmmd = '{hue: 9'(hue), max: 8'(sum + (diff + 1) / 2), min: 8'(sum - diff / 2),
             diff: 8'(diff), sum: 8'(sum)};
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    check("valid", int'(v256 && v128), 1);
    check($sformatf("bin256 h=%0d d=%0d s=%0d", hue, diff, sum), int'(bin256), ref_bin(hue, diff, sum, 256));
    check($sformatf("bin128 h=%0d d=%0d s=%0d", hue, diff, sum), int'(bin128), ref_bin(hue, diff, sum, 128));
    if (exp256 >= 0) check($sformatf("printed cell d=%0d s=%0d", diff, sum), int'(bin256), exp256);
  endtask

  initial begin
    hmmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // hue-0 cells printed on the HMMD slice
    apply(0, 0, 0, 0);   apply(0, 3, 255, 31);  apply(0, 0, 128, 16);  apply(0, 0, 120, 15);
    apply(0, 10, 0, 32); apply(0, 10, 255, 39); apply(0, 10, 130, 36);
    apply(0, 30, 20, 64); apply(0, 30, 250, 67);
    apply(0, 80, 40, 128); apply(0, 80, 200, 131);
    // Diff x Sum sweep
    for (int d = 0; d < 256; d++)
      for (int s = 0; s < 256; s += 5)
        apply($urandom_range(359), d, s);
    // every hue in every subspace
    for (int h = 0; h <= 360; h++) begin
      apply(h, 2, 100); apply(h, 12, 40); apply(h, 40, 180); apply(h, 90, 77); apply(h, 200, 128);
    end
    repeat (3000) apply($urandom_range(360), $urandom_range(255), $urandom_range(255));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
