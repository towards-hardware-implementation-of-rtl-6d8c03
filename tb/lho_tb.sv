// lho_tb -- self-checking test of the local histogram operator.
//
// Feeds a legal random sequence of +1/-1 pixel operations (a pixel is only
// removed after it was added, at most SE*SE pixels per colour) with idle
// cycles, and after every cycle compares all presence bits with a reference
// count per bin.  Runs of the same bin back to back exercise the
// read-modify-write of the count memory.
module lho_tb;
  import csd_pkg::*;

  localparam int BINS = 256, SE = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  lho_op_e op;
  logic [7:0] bin;
  logic [BINS-1:0] presence;
  int checks = 0, failures = 0;
  int cnt [BINS];
  int in_elem [$];            // bins of the pixels currently in_elem

  lho #(.BINS(BINS), .SE(SE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    logic [BINS-1:0] exp;
    foreach (cnt[m]) exp[m] = (cnt[m] != 0);
    checks++;
    if (presence !== exp) begin
      failures++;
      $display("FAIL presence mismatch, %0d bins differ", $countones(presence ^ exp));
    end
  endtask

  initial begin
    int b, k, hot;
    foreach (cnt[m]) cnt[m] = 0;
    op = OP_ADD; bin = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      in_valid = ($urandom_range(7) != 0);
      hot = $urandom_range(3);     // few colours make repeats likely
      if (in_valid) begin
        if (in_elem.size() == 0 || (in_elem.size() < 64 && $urandom_range(1))) begin
          b = (hot == 0) ? $urandom_range(255) : $urandom_range(3);
          if (cnt[b] == SE * SE) b = (b + 1) % BINS;
          op = OP_ADD; bin = 8'(b); cnt[b]++; in_elem.push_back(b);
        end else begin
          k = $urandom_range(in_elem.size() - 1);
          b = in_elem[k]; in_elem.delete(k);
          op = OP_SUB; bin = 8'(b); cnt[b]--;
        end
      end
      @(posedge clk); #1;
      compare();
    end
    // remove everything: all presence bits must clear
    while (in_elem.size() > 0) begin
      @(negedge clk);
      b = in_elem.pop_front();
      in_valid = 1; op = OP_SUB; bin = 8'(b); cnt[b]--;
      @(posedge clk); #1;
      compare();
    end
    @(negedge clk); in_valid = 0;
    checks++;
    if (presence != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
