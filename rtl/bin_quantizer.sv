// bin_quantizer -- normalisation of the histogram bin values to 8 bits.
//
// Each bin of the total colour-structure histogram counts element positions
// that contain the bin's colour.  It is divided by NWIN, the number of
// positions the element took in the frame, and scaled to OUT_W bits:
//     value = floor(hist * (2^OUT_W - 1) / NWIN)
// so a colour present at every position maps to 255.  The MPEG-7 descriptor
// quantizes this normalised value non-linearly; the thresholds of that
// quantizer are not given with this design, so the mapping here is linear,
// a deliberate simplification.  The division is done by an iterative divider
// (seq_divider), one quotient bit per clock.
//
// Interface: valid/ready input (`in_bin`, `in_hist`); in_ready is high while
// idle.  `out_valid` pulses once per bin with `out_bin`, `out_value` and the
// raw `out_hist`, NUM_W + 2 cycles after the input was taken.
module bin_quantizer #(
  parameter int unsigned BINS   = 256,
  parameter int unsigned HIST_W = 17,
  parameter int unsigned NWIN   = 3650,
  parameter int unsigned OUT_W  = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [$clog2(BINS)-1:0] in_bin,
  input  logic [HIST_W-1:0]       in_hist,
  output logic                    out_valid,
  output logic [$clog2(BINS)-1:0] out_bin,
  output logic [OUT_W-1:0]        out_value,
  output logic [HIST_W-1:0]       out_hist
);

  localparam int unsigned NUM_W = HIST_W + OUT_W;
  localparam int unsigned DEN_W = $clog2(NWIN + 1);

  logic              busy;
  logic              div_start, div_busy, div_done;
  logic [NUM_W-1:0]  num, quot;
  logic [DEN_W-1:0]  rem;

  // hist * (2^OUT_W - 1)
  assign num = (NUM_W'(in_hist) << OUT_W) - NUM_W'(in_hist);
  assign in_ready = !busy;
  assign div_start = in_valid && !busy;

  seq_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W)) u_div (
    .clk, .rst_n,
    .start(div_start), .num(num), .den(DEN_W'(NWIN)),
    .busy(div_busy), .done(div_done), .quot(quot), .rem(rem)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      out_bin   <= '0;
      out_value <= '0;
      out_hist  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (div_start) begin
        busy     <= 1'b1;
        out_bin  <= in_bin;
        out_hist <= in_hist;
      end else if (div_done) begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
        out_value <= (quot > NUM_W'((1 << OUT_W) - 1)) ? '1 : OUT_W'(quot);
      end
    end
  end

  logic unused_div;
  assign unused_div = ^{rem, div_busy};

endmodule
