// bram_bank_tb -- self-checking test of the BRAM association.
//
// Fills every BRAM through the shared write port with per-bank enables,
// then reads all ten banks at independent random addresses each cycle and
// checks the data one clock later against a shadow copy; writes to random
// banks continue during the reads, and a read of the address being written
// must return the old data.
module bram_bank_tb;
  localparam int N_BRAM = 10, DEPTH = 960, AW = $clog2(DEPTH);

  logic clk = 0;
  logic [7:0] di;
  logic [AW-1:0] wa;
  logic [N_BRAM-1:0] we;
  logic [AW-1:0] ra [N_BRAM];
  logic [7:0] do_ [N_BRAM];
  int checks = 0, failures = 0;
  int shadow [N_BRAM][DEPTH];
  int exp_q [N_BRAM];

  bram_bank #(.N_BRAM(N_BRAM), .DEPTH(DEPTH), .DATA_W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = '0; di = 0; wa = 0;
    foreach (ra[k]) ra[k] = 0;
    // fill
    for (int a = 0; a < DEPTH; a++)
      for (int k = 0; k < N_BRAM; k++) begin
        @(negedge clk);
        we = N_BRAM'(1) << k; wa = AW'(a); di = 8'($urandom);
        shadow[k][a] = int'(di);
      end
    @(negedge clk); we = '0;
    // random reads with concurrent writes
    repeat (5000) begin
      @(negedge clk);
      foreach (ra[k]) begin
        ra[k] = AW'($urandom_range(DEPTH - 1));
        exp_q[k] = shadow[k][ra[k]];
      end
      we = '0;
      if ($urandom_range(1)) begin
        int k;
        k = $urandom_range(N_BRAM - 1);
        we[k] = 1; di = 8'($urandom);
        wa = ($urandom_range(1)) ? ra[k] : AW'($urandom_range(DEPTH - 1));
        shadow[k][wa] = int'(di);
      end
      @(negedge clk);
      we = '0;
      foreach (do_[k]) begin
        checks++;
        if (int'(do_[k]) != exp_q[k]) begin
          failures++;
          $display("FAIL bank %0d: got %0d expected %0d", k, do_[k], exp_q[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
