// pixel_demux_tb -- self-checking test of the pixel demultiplexer.
//
// First the ten-plus-five bytes of the published demultiplexer waveform are
// sent: they must reach BRAM 1..10 in turn and then wrap to BRAM 1..5.  Then
// two whole frames of random data (with gaps in in_valid and a clear between
// them) are checked write by write against n mod N_BRAM / n div N_BRAM, and
// `loaded` must pulse exactly with the last write of each frame.
module pixel_demux_tb;
  localparam int N_BRAM = 10, DEPTH = 24;

  logic clk = 0, rst_n = 0;
  logic clear = 0, in_valid = 0, loaded;
  logic [7:0] in_data, di;
  logic [N_BRAM-1:0] we;
  logic [$clog2(DEPTH)-1:0] wa;
  int checks = 0, failures = 0;

  pixel_demux #(.N_BRAM(N_BRAM), .DEPTH(DEPTH), .DATA_W(8)) dut (.*);

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

  // send pixel n of the frame and check the write it produces
  task automatic send(int n, logic [7:0] d);
    @(negedge clk);
    in_data = d; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    check($sformatf("we pixel %0d", n), int'(we), 1 << (n % N_BRAM));
    check($sformatf("wa pixel %0d", n), int'(wa), n / N_BRAM);
    check($sformatf("di pixel %0d", n), int'(di), int'(d));
    check($sformatf("loaded pixel %0d", n), int'(loaded), int'(n == N_BRAM * DEPTH - 1));
    if ($urandom_range(3) == 0) begin
      @(negedge clk);
      check("idle we", int'(we), 0);
    end
  endtask

  logic [7:0] printed [15] = '{8'b01110100, 8'b01100110, 8'b01110000, 8'b00101010, 8'b01100011,
                                8'b00001110, 8'b01110100, 8'b01110001, 8'b00000111, 8'b01001100,
                                8'b01110000, 8'b00011010, 8'b00010011, 8'b00001110, 8'b01110100};

  initial begin
    in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (printed[n]) send(n, printed[n]);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    repeat (2) begin
      for (int n = 0; n < N_BRAM * DEPTH; n++) send(n, 8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
