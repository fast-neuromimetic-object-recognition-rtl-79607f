// hmax_pkg: sizes, widths, types and index functions shared by the HMAX
// feature-extraction pipeline (input buffer -> S1 -> C1 -> S2 -> C2).
//
// Index conventions used throughout the RTL are zero based:
//   filter f = 0..15   has side length 7 + 2f           (paper: 5 + 2j, j = 1..16)
//   band   b = 0..7    holds filters 2b and 2b+1, pooling period 4 + b   (paper: 3 + b)
//   patch size k = 0..3 has side 4(k+1), i.e. 4, 8, 12, 16 C1 units
// The numbers (16 filters, 8 bands, 320 patches per size, 8-bit pixels,
// 16-bit coefficients, 23-bit intermediate S1 values, 16-bit C1 values and
// 42-bit C2 values) follow the paper. Coordinate widths (8 bits, so images up
// to 255 x 255) and the 45-bit second-pass accumulator are this design's own.
package hmax_pkg;

  localparam int PIX_W   = 8;    // grayscale pixel
  localparam int CW      = 16;   // S1 1-D kernel coefficient (signed)
  localparam int HALF    = 19;   // stored half-kernel length, centre..edge, for the 37-tap filter
  localparam int MAX_D   = 37;   // largest filter side
  localparam int IW      = 23;   // intermediate (first pass) result, signed
  localparam int ACC_W   = 46;   // second pass accumulator / orientation response, signed
  localparam int EN_W    = 27;   // window energy sum of squares, unsigned
  localparam int ROOT_W  = 14;   // sqrt of window energy
  localparam int S1W     = 16;   // normalised S1 magnitude
  localparam int C1W     = 16;   // C1 value and S2 patch coefficient
  localparam int C2W     = 42;   // squared patch distance
  localparam int COORD_W = 8;    // row / column counters
  localparam int NUM_PSIZE = 4;  // patch sizes 4, 8, 12, 16
  localparam int NORIENT = 4;    // 0, 90, 45, 135 degrees (lane order used in the RTL)

  // one S1 result for all four orientations at one pixel
  typedef struct packed {
    logic [NORIENT-1:0][S1W-1:0] mag;   // [0]=0deg [1]=90deg [2]=45deg [3]=135deg
    logic [2:0]                  band;
    logic                        scale; // 0: smaller filter of the band, 1: larger
    logic [COORD_W-1:0]          row;
    logic [COORD_W-1:0]          col;
    logic                        last;  // last result of this filter size
  } s1_result_t;

  typedef logic [NORIENT-1:0][C1W-1:0] c1_word_t;  // one C1 location, 4 orientations

  function automatic int filt_diam(input int f);   return 7 + 2*f;      endfunction
  function automatic int band_delta(input int b);  return 4 + b;        endfunction
  function automatic int patch_side(input int k);  return 4*(k+1);      endfunction
  function automatic int patch_kappa(input int k); return 16*(k+1)*(k+1); endfunction
  // first word of patch size k in the patch memory (2 words per patch position)
  function automatic int patch_base(input int k);
    int s = 0;
    for (int i = 0; i < k; i++) s += 2*patch_kappa(i);
    return s;
  endfunction
  // Delta x Delta blocks per side of band b (S1 grid of the larger filter)
  function automatic int band_nb(input int img_w, input int b);
    return (img_w - filt_diam(2*b+1) + 1) / band_delta(b);
  endfunction

endpackage
