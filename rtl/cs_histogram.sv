// cs_histogram -- colour-structure histogram of one BRAM lane.
//
// Holds BINS counters of HIST_W bits (17 in the published block diagram).
// Each `acc` strobe marks one complete position of the structuring element;
// every bin whose presence bit is set is then incremented by one, all bins in
// the same cycle -- a bin counts element positions that contain its colour,
// however many pixels of it they hold.  `clear` zeroes all counters before a
// frame.  `rd_bin` selects the counter shown on `rd_data` (combinational
// read) for the merge stage.  Counters do not saturate: HIST_W must hold the
// number of element positions of a lane.
module cs_histogram #(
  parameter int unsigned BINS   = 256,
  parameter int unsigned HIST_W = 17
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    acc,
  input  logic [BINS-1:0]         presence,
  input  logic [$clog2(BINS)-1:0] rd_bin,
  output logic [HIST_W-1:0]       rd_data
);

  logic [HIST_W-1:0] h [BINS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < BINS; m++) h[m] <= '0;
    end else if (clear) begin
      for (int m = 0; m < BINS; m++) h[m] <= '0;
    end else if (acc) begin
      for (int m = 0; m < BINS; m++) h[m] <= h[m] + HIST_W'(presence[m]);
    end
  end

  assign rd_data = h[rd_bin];

endmodule
