// csd_pkg -- types and constants shared by the Color Structure Descriptor
// (CSD) extractor.
//
// The extractor turns a stream of 24-bit RGB pixels into the MPEG-7 colour
// structure histogram of the frame.  Every block works on 8-bit colour
// channels; hue is an integer angle in degrees held in 9 bits (0..359), the
// width the hue bus has in the published simulation waveforms.  The diff-axis
// cut points 6, 20, 60 and 110 that split the HMMD space into five subspaces
// are the ones printed on the HMMD-slice figure of the quantizer.
package csd_pkg;

  localparam int unsigned CH_W  = 8;   // one colour channel, and Max/Min/Diff/Sum
  localparam int unsigned HUE_W = 9;   // hue in degrees, 0..359

  // Diff-axis cut points between the five HMMD subspaces.
  localparam int unsigned CUT1 = 6;
  localparam int unsigned CUT2 = 20;
  localparam int unsigned CUT3 = 60;
  localparam int unsigned CUT4 = 110;

  typedef struct packed {
    logic [CH_W-1:0] r;
    logic [CH_W-1:0] g;
    logic [CH_W-1:0] b;
  } rgb_t;

  typedef struct packed {
    logic [HUE_W-1:0] hue;
    logic [CH_W-1:0]  max;
    logic [CH_W-1:0]  min;
    logic [CH_W-1:0]  diff;
    logic [CH_W-1:0]  sum;
  } hmmd_t;

  // Tag carried with every pixel read from the frame memories: the pixel
  // either enters the structuring element (+1) or leaves it (-1).
  typedef enum logic {
    OP_ADD = 1'b0,
    OP_SUB = 1'b1
  } lho_op_e;

  // Number of hue and sum levels of one subspace (table of HMMD quantization
  // levels).  Operating points 256 and 128 are provided.
  function automatic int unsigned hue_levels(int unsigned nbins, int unsigned sub);
    unique case (sub)
      0:       return 1;
      1:       return 4;
      default: return (nbins == 128) ? 8 : 16;
    endcase
  endfunction

  function automatic int unsigned sum_levels(int unsigned nbins, int unsigned sub);
    unique case (sub)
      0:       return (nbins == 128) ? 16 : 32;
      1:       return (nbins == 128) ? 4 : 8;
      default: return 4;
    endcase
  endfunction

  // First bin index of a subspace: bins are numbered subspace by subspace.
  function automatic int unsigned sub_offset(int unsigned nbins, int unsigned sub);
    int unsigned off;
    off = 0;
    for (int unsigned s = 0; s < 5; s++)
      if (s < sub) off += hue_levels(nbins, s) * sum_levels(nbins, s);
    return off;
  endfunction

endpackage
