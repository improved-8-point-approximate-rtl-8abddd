// dct_pkg -- constants shared by the 8-point approximate DCT datapath.
//
// The transform works on 8-point vectors (N = 8). Every factor stage of the
// fast algorithm (A1, A11, A12) adds at most one bit of growth, so a 1-D
// pass widens a W-bit sample to W + DCT_GROWTH bits and the 2-D transform
// widens an L-bit pixel to L + 2*DCT_GROWTH bits. The word length L is the
// system word length swept over {4, 8, 12, 16} in the FPGA and ASIC results;
// 8 is the default here because the image experiments use 8-bit pictures.
// Full-precision growth (no truncation) is this design's choice.
package dct_pkg;

  localparam int unsigned N          = 8;   // transform length
  localparam int unsigned L_DEFAULT  = 8;   // system word length
  localparam int unsigned DCT_GROWTH = 3;   // bits added by one 1-D pass
  localparam int unsigned ROW_BITS   = 3;   // log2(N): row / column index

  typedef logic [ROW_BITS-1:0] idx_t;

endpackage
