// bram_bank -- the association of N_BRAM block RAMs that holds one frame.
//
// Each BRAM stores DEPTH 8-bit bin indices (960 by default: a 120x80 frame of
// 8-bit values is 76.8 kbit, split over ten memories).  All memories share
// the write data `di` and write address `wa`; each has its own write enable
// `we[k]`, driven by the demultiplexer, and its own read address `ra[k]` and
// read data `do_[k]` (the port list of the published BRAM-association
// schematic: di, wa, we, ra1..ra10, do1..do10, clk).
//
// Timing: writes and reads are synchronous, like the FPGA block RAM
// primitives: the data at `ra[k]` appears on `do_[k]` one clock later.  A
// read and a write of the same address in one cycle return the old data.
// The published schematic shows 9-bit address ports, which cannot reach 960
// words; the address here is $clog2(DEPTH) bits wide.
module bram_bank #(
  parameter int unsigned N_BRAM = 10,
  parameter int unsigned DEPTH  = 960,
  parameter int unsigned DATA_W = 8
) (
  input  logic                     clk,
  input  logic [DATA_W-1:0]        di,
  input  logic [$clog2(DEPTH)-1:0] wa,
  input  logic [N_BRAM-1:0]        we,
  input  logic [$clog2(DEPTH)-1:0] ra  [N_BRAM],
  output logic [DATA_W-1:0]        do_ [N_BRAM]
);

  for (genvar k = 0; k < N_BRAM; k++) begin : g_bram
    logic [DATA_W-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (we[k]) mem[wa] <= di;
      do_[k] <= mem[ra[k]];
    end
  end

endmodule
