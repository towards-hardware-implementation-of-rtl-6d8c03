// pixel_demux -- distributes the quantized pixel stream over the frame BRAMs.
//
// Pixels arrive in raster order, one 8-bit bin index per `in_valid`.  Pixel
// n of the frame goes to BRAM (n mod N_BRAM) at address (n div N_BRAM): the
// first pixel to BRAM 0, the next to BRAM 1 and so on, wrapping back to BRAM
// 0 after the last one -- the order the published demultiplexer simulation
// shows.  With an image width that is a multiple of N_BRAM, BRAM k thus holds
// image columns k, k+N_BRAM, k+2*N_BRAM, ..., row after row: a sub-image of
// IMG_W/N_BRAM columns by IMG_H rows, stored row-major.
//
// Interface: all write outputs are registered and follow `in_valid` by one
// clock: a one-hot `we`, shared write address `wa` and data `di`.  `loaded`
// pulses together with the write of the frame's last pixel.  `clear` (one
// cycle, between frames) returns the pointer to BRAM 0, address 0.
module pixel_demux #(
  parameter int unsigned N_BRAM = 10,
  parameter int unsigned DEPTH  = 960,     // pixels per BRAM
  parameter int unsigned DATA_W = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic [DATA_W-1:0]        in_data,
  output logic [N_BRAM-1:0]        we,
  output logic [$clog2(DEPTH)-1:0] wa,
  output logic [DATA_W-1:0]        di,
  output logic                     loaded
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned SW = $clog2(N_BRAM);

  logic [SW-1:0] sel;
  logic [AW-1:0] addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel    <= '0;
      addr   <= '0;
      we     <= '0;
      wa     <= '0;
      di     <= '0;
      loaded <= 1'b0;
    end else begin
      we     <= '0;
      loaded <= 1'b0;
      if (clear) begin
        sel  <= '0;
        addr <= '0;
      end else if (in_valid) begin
        we[sel] <= 1'b1;
        wa      <= addr;
        di      <= in_data;
        if (sel == SW'(N_BRAM - 1)) begin
          sel <= '0;
          if (addr == AW'(DEPTH - 1)) begin
            addr   <= '0;
            loaded <= 1'b1;
          end else begin
            addr <= addr + 1'b1;
          end
        end else begin
          sel <= sel + 1'b1;
        end
      end
    end
  end

endmodule
