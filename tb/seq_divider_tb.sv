// seq_divider_tb -- self-checking test of the iterative divider: random and
// corner operands, quotient and remainder against the * and % operators,
// and the latency: start sampled on edge k, done high in the cycle after
// edge k+NUM_W (counted here from negedge to negedge, NUM_W+1).
module seq_divider_tb;
  localparam int NUM_W = 14, DEN_W = 8;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  logic [NUM_W-1:0] num, quot;
  logic [DEN_W-1:0] den, rem;
  int checks = 0, failures = 0;

  seq_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int d);
    int cyc;
    @(negedge clk);
    num = NUM_W'(n); den = DEN_W'(d); start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (quot != NUM_W'(n / d) || rem != DEN_W'(n % d) || cyc != NUM_W + 1) begin
      failures++;
      $display("FAIL %0d/%0d: quot=%0d rem=%0d cycles=%0d", n, d, quot, rem, cyc);
    end
  endtask

  initial begin
    num = 0; den = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 1); run(15300, 1); run(15300, 255); run(16383, 255); run(60, 120);
    run(255, 255); run(1, 2); run(16383, 1);
    repeat (2000) run($urandom_range(16383), $urandom_range(255, 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
