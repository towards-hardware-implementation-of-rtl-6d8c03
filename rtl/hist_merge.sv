// hist_merge -- output multiplexer and total colour-structure histogram.
//
// After a sweep every BRAM lane holds a partial histogram HL1..HLn.  The
// merge stage walks the bins in order; for each bin it drives the bin index
// to all lanes, steps the multiplexer over the N_BRAM lane outputs one lane
// per clock and adds them up, giving the bin of the total histogram
// HL Total = HL1 + ... + HLn.  The total is offered on a valid/ready stream
// (`out_valid`, `out_bin`, `out_hist`); the next bin starts once it is taken.
// Summing one lane per clock through a multiplexer follows the published
// block diagram; the stream handshake is this design's choice.
//
// Timing: `start` (one cycle, while idle) begins; each bin takes N_BRAM
// cycles plus one cycle in which out_valid is high and out_ready is sampled.
// `done` pulses in the cycle after the last bin is taken.  The total is
// HIST_W bits wide like the lane histograms; it must hold the number of
// element positions of the whole frame.
module hist_merge #(
  parameter int unsigned N_BRAM = 10,
  parameter int unsigned BINS   = 256,
  parameter int unsigned HIST_W = 17
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic [$clog2(BINS)-1:0] rd_bin,
  input  logic [HIST_W-1:0]       lane_data [N_BRAM],
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [$clog2(BINS)-1:0] out_bin,
  output logic [HIST_W-1:0]       out_hist,
  output logic                    done
);

  localparam int unsigned BW = $clog2(BINS);
  localparam int unsigned LW = (N_BRAM > 1) ? $clog2(N_BRAM) : 1;

  logic [LW-1:0]     lane;
  logic [HIST_W-1:0] sum;
  logic [HIST_W-1:0] mux_out;

  assign mux_out  = lane_data[lane];
  assign out_bin  = rd_bin;
  assign out_hist = sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      done      <= 1'b0;
      rd_bin    <= '0;
      lane      <= '0;
      sum       <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          rd_bin <= '0;
          lane   <= '0;
          sum    <= '0;
        end
      end else if (out_valid) begin
        if (out_ready) begin
          out_valid <= 1'b0;
          lane      <= '0;
          sum       <= '0;
          if (rd_bin == BW'(BINS - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            rd_bin <= rd_bin + 1'b1;
          end
        end
      end else begin
        sum <= sum + mux_out;
        if (lane == LW'(N_BRAM - 1)) out_valid <= 1'b1;
        else                         lane <= lane + 1'b1;
      end
    end
  end

  // a stream word holds steady until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_bin) && $stable(out_hist));

endmodule
