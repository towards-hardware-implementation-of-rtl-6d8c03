// lho -- local histogram operator of one BRAM lane.
//
// Keeps, for every colour bin, the number of pixels of that colour inside the
// current position of the structuring element, and from it one presence bit
// per bin.  Each pixel read from the BRAM addresses the local-histogram
// memory with its bin index; the count is incremented (+1, pixel enters the
// element) or decremented (-1, pixel leaves), written back, and tested
// against zero: the result sets or clears the bin's bit in the BINS x 1
// register bank whose outputs feed the colour-structure histogram.  This is
// the structure of the published LHO diagram (SRAM, +1/-1, multiplexer, =0
// test, 256x1 register bank).
//
// Timing: one pixel per cycle.  The count memory is read combinationally and
// written at the clock edge, so back-to-back updates of the same bin need no
// forwarding; `presence` reflects a pixel one clock after it is presented.
// The counts are CNT_W bits, enough for SE*SE equal pixels.  Reset clears
// counts and presence; afterwards the caller keeps them consistent by
// removing every pixel it added.
module lho
  import csd_pkg::*;
#(
  parameter int unsigned BINS = 256,
  parameter int unsigned SE   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  lho_op_e                 op,
  input  logic [$clog2(BINS)-1:0] bin,
  output logic [BINS-1:0]         presence
);

  localparam int unsigned CNT_W = $clog2(SE * SE + 1);

  logic [CNT_W-1:0] cnt_mem [BINS];
  logic [CNT_W-1:0] cur, nxt;

  always_comb begin
    cur = cnt_mem[bin];
    nxt = (op == OP_ADD) ? cur + 1'b1 : cur - 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < BINS; m++) cnt_mem[m] <= '0;
      presence <= '0;
    end else if (in_valid) begin
      cnt_mem[bin]  <= nxt;
      presence[bin] <= (nxt != '0);
    end
  end

  // a colour cannot leave the element more often than it entered, nor be
  // counted more than SE*SE times
  assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && op == OP_SUB |-> cur != '0);
  assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && op == OP_ADD |-> cur < CNT_W'(SE * SE));

endmodule
