// read_addr_gen -- read-address generator that sweeps the structuring element.
//
// Every BRAM holds a sub-image of SW columns by SH rows (row-major).  One
// generator drives the same address to all BRAMs, so the N_BRAM structuring
// elements of SE x SE samples sweep their sub-images in lock step.  The
// element is moved horizontally along a strip of SE rows, one column per
// step; within a column the SE pixels are read top to bottom, P(1,j) ..
// P(SE,j), and columns are visited left to right, the order of the published
// address-generation flowchart.  Every read is tagged:
//   * columns 0 .. SE-1 of a strip are read with OP_ADD (the element fills);
//   * for each later column j, column j-SE is first read with OP_SUB (it
//     leaves the element), then column j with OP_ADD (it enters);
//   * `acc` marks the last read of a column after which the element is
//     complete (j >= SE-1): one element position per such strobe;
//   * at the end of a strip the SE columns still inside the element are read
//     with OP_SUB, which returns every local count to zero for the next strip.
// Strips start at rows 0, 1, ..., SH-SE, so the element visits every
// position that lies wholly inside the sub-image: (SH-SE+1)*(SW-SE+1)
// positions, each strip taking 2*SW*SE cycles (every pixel of the strip is
// read once to add it and once to remove it).  The
// one-row strip step and the draining reads are this design's choices.
//
// Interface: `start` (one cycle, while idle) begins a sweep.  While `rd_en`
// is high, `rd_addr`, `op` and `acc` describe one read per cycle, with no
// gaps.  `done` pulses in the cycle after the last read.
module read_addr_gen
  import csd_pkg::*;
#(
  parameter int unsigned SW = 12,   // columns per BRAM
  parameter int unsigned SH = 80,   // rows per BRAM
  parameter int unsigned SE = 8     // structuring element side
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       rd_en,
  output logic [$clog2(SW*SH)-1:0]   rd_addr,
  output lho_op_e                    op,
  output logic                       acc,
  output logic                       done
);

  localparam int unsigned AW = $clog2(SW*SH);
  localparam int unsigned YW = $clog2(SH);
  localparam int unsigned XW = $clog2(SW);
  localparam int unsigned IW = (SE > 1) ? $clog2(SE) : 1;

  typedef enum logic [1:0] {P_ADD, P_SUB, P_DRAIN} phase_e;

  phase_e        phase;
  logic [YW-1:0] y;      // top row of the strip
  logic [XW-1:0] j;      // column entering the element
  logic [XW-1:0] dcol;   // column being drained
  logic [IW-1:0] i;      // row inside the element
  logic [XW-1:0] col;

  always_comb begin
    unique case (phase)
      P_ADD:   col = j;
      P_SUB:   col = j - XW'(SE);
      default: col = dcol;
    endcase
    rd_en   = busy;
    rd_addr = AW'((32'(y) + 32'(i)) * SW + 32'(col));
    op      = (phase == P_ADD) ? OP_ADD : OP_SUB;
    acc     = busy && phase == P_ADD && i == IW'(SE - 1) && j >= XW'(SE - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      phase <= P_ADD;
      y     <= '0;
      j     <= '0;
      dcol  <= '0;
      i     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          phase <= P_ADD;
          y     <= '0;
          j     <= '0;
          i     <= '0;
        end
      end else if (i != IW'(SE - 1)) begin
        i <= i + 1'b1;
      end else begin
        i <= '0;
        unique case (phase)
          P_SUB: phase <= P_ADD;
          P_ADD: begin
            if (j == XW'(SW - 1)) begin
              phase <= P_DRAIN;
              dcol  <= XW'(SW - SE);
            end else begin
              j     <= j + 1'b1;
              phase <= (j + 1'b1 >= XW'(SE)) ? P_SUB : P_ADD;
            end
          end
          default: begin  // P_DRAIN
            if (dcol == XW'(SW - 1)) begin
              j     <= '0;
              phase <= P_ADD;
              if (y == YW'(SH - SE)) begin
                busy <= 1'b0;
                done <= 1'b1;
              end else begin
                y <= y + 1'b1;
              end
            end else begin
              dcol <= dcol + 1'b1;
            end
          end
        endcase
      end
    end
  end

  initial begin
    assert (SE >= 1 && SE <= SW && SE <= SH)
      else $error("read_addr_gen: the structuring element must fit in the sub-image");
  end

endmodule
