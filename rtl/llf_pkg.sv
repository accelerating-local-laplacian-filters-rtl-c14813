// llf_pkg: constants and size functions shared by the local Laplacian
// filter accelerator.
//
// A sub-image is streamed one column per beat; the LANES pixels of a column
// travel side by side. Every filter stage works on "valid" convolution
// (n lanes in, n-2 lanes out), every downsampler keeps the even lanes
// (n in, ceil(n/2) out) and every upsampler doubles the lane count. The
// functions below give the lane count and the position of the pixel of
// interest at every pyramid level, so the datapath and the testbenches
// agree on the geometry.
//
// From the paper: 8-bit pixels, a 256-bit input stream per unit (hence 32
// lanes), a 16-bit output stream, the filter scale factor 4, 3 RGB channels
// and 3 level processing units per channel. Own choices: the upsampler gain
// of 4 (a left shift by 2), the full-resolution centre position 15 of a
// 32x32 sub-image, and the 8-bit saturating column counters.
package llf_pkg;

  parameter int unsigned PIX_W      = 8;   // pixels in [0,255]
  parameter int unsigned STREAM_W   = 256; // input stream width per unit
  parameter int unsigned LANES      = STREAM_W / PIX_W;
  parameter int unsigned COEF_W     = 16;  // output stream width per unit
  parameter int unsigned FILT_SHIFT = 4;   // filter scale factor (alpha)
  parameter int unsigned UP_SHIFT   = 2;   // upsampler gain 4 = 2^2
  parameter int unsigned CENTER0    = 15;  // pixel of interest, full resolution
  parameter int unsigned NUM_CH     = 3;   // R, G, B
  parameter int unsigned NUM_LVL    = 3;   // LPUs L1, L2, L3 per channel
  parameter int unsigned COL_W      = 8;   // column counter width
  parameter int unsigned PERF_W     = 32;  // activity counter width

  // Configuration targets of the remap look-up tables.
  typedef enum logic [1:0] {
    CFG_DETAIL = 2'd0,  // detail table: sigma * f_d(d / sigma)
    CFG_EDGE   = 2'd1,  // edge table:   f_e(d - sigma) + sigma
    CFG_SIGMA  = 2'd2   // the threshold sigma itself
  } cfg_sel_e;

  // One configuration write, broadcast by the host to every remap unit.
  typedef struct packed {
    logic             we;
    cfg_sel_e         sel;
    logic [PIX_W-1:0] addr;  // |i - g|, used by the table writes
    logic [PIX_W-1:0] data;
  } cfg_wr_t;

  // Lane count after k (filter, downsample) rounds, starting from n0 lanes.
  function automatic int unsigned level_lanes(int unsigned n0, int unsigned k);
    int unsigned n = n0;
    for (int unsigned i = 0; i < k; i++) n = (n - 2 + 1) / 2;
    return n;
  endfunction

  // Index of the pixel of interest at level k. Level-k sample q lies over
  // level-(k-1) sample 2q+1 (valid filter shifts by one, downsampling keeps
  // even samples), so the index maps back as q = (c-1)/2.
  function automatic int unsigned level_center(int unsigned c0, int unsigned k);
    int unsigned c = c0;
    for (int unsigned i = 0; i < k; i++) c = (c - 1) / 2;
    return c;
  endfunction

endpackage
