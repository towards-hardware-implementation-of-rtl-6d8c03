// read_addr_gen_tb -- self-checking test of the read-address generator.
//
// Two instances: the default sub-image (12 x 80, element 8) and a small one
// (5 x 7, element 3).  The testbench keeps, per pixel of the sub-image, how
// many times it was added minus removed.  At every `acc` strobe that set of
// pixels must be exactly the next expected element position (strips top to
// bottom, positions left to right); at `done` every count must be back to
// zero.  Also checked: the number of positions, that reads come one per
// cycle without gaps, and the total sweep length in cycles.
module read_addr_gen_tb;
  import csd_pkg::*;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

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

  // ---- default instance
  logic s0 = 0, b0, en0, acc0, d0;
  logic [$clog2(12*80)-1:0] a0;
  lho_op_e op0;
  read_addr_gen #(.SW(12), .SH(80), .SE(8)) dut0 (.clk, .rst_n, .start(s0), .busy(b0),
    .rd_en(en0), .rd_addr(a0), .op(op0), .acc(acc0), .done(d0));

  // ---- small instance
  logic s1 = 0, b1, en1, acc1, d1;
  logic [$clog2(5*7)-1:0] a1;
  lho_op_e op1;
  read_addr_gen #(.SW(5), .SH(7), .SE(3)) dut1 (.clk, .rst_n, .start(s1), .busy(b1),
    .rd_en(en1), .rd_addr(a1), .op(op1), .acc(acc1), .done(d1));

  // run one sweep of an instance given its observed signals
  task automatic sweep(int sw, int sh, int se, int inst);
    int occ [];
    int px, py, npos, cycles, gaps, good;
    bit en, acc, done, sub;
    int addr;
    occ = new[sw * sh];
    foreach (occ[a]) occ[a] = 0;
    px = 0; py = 0; npos = 0; cycles = 0; gaps = 0;
    @(negedge clk);
    if (inst == 0) s0 = 1; else s1 = 1;
    @(negedge clk);
    s0 = 0; s1 = 0;
    forever begin
      if (inst == 0) begin en = en0; acc = acc0; done = d0; addr = int'(a0); sub = (op0 == OP_SUB); end
      else           begin en = en1; acc = acc1; done = d1; addr = int'(a1); sub = (op1 == OP_SUB); end
      if (done) break;
      if (!en) gaps++;
      else begin
        cycles++;
        occ[addr] += sub ? -1 : 1;
        if (occ[addr] < 0 || occ[addr] > 1) begin
          failures++; checks++;
          $display("FAIL inst %0d: pixel %0d count %0d", inst, addr, occ[addr]);
        end
      end
      if (acc) begin
        good = 1;
        for (int y = 0; y < sh; y++)
          for (int x = 0; x < sw; x++)
            if (occ[y * sw + x] != int'(y >= py && y < py + se && x >= px && x < px + se)) good = 0;
        check($sformatf("inst %0d position (%0d,%0d)", inst, px, py), good, 1);
        npos++;
        px++;
        if (px > sw - se) begin px = 0; py++; end
      end
      @(negedge clk);
    end
    check($sformatf("inst %0d positions", inst), npos, (sh - se + 1) * (sw - se + 1));
    check($sformatf("inst %0d gaps", inst), gaps, 0);
    check($sformatf("inst %0d cycles", inst), cycles, (sh - se + 1) * (sw * se + sw * se));
    good = 1;
    foreach (occ[a]) if (occ[a] != 0) good = 0;
    check($sformatf("inst %0d drained", inst), good, 1);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    sweep(5, 7, 3, 1);
    sweep(12, 80, 8, 0);
    sweep(5, 7, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
