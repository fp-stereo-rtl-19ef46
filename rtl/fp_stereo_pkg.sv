// fp_stereo_pkg: sizes, derived data widths and shared types of the FP-Stereo
// semi-global matching (SGM) pipeline.
//
// The defaults describe the pipeline's headline configuration: a 7x7 census
// transform, a disparity range of 128 processed 32 disparities per clock
// cycle, four aggregation paths, winner-takes-all and a median filter, for
// 8-bit images of up to 1242 x 374 pixels. Data widths are not chosen by
// hand; they are derived from the algorithm parameters by the closed-form
// functions below, so a wider window or a larger penalty widens every bus
// that carries the affected quantity and nothing else.
//
// The penalties P1/P2, the median window and the FIFO depth are this design's
// own choices; the paper gives no values for them.
package fp_stereo_pkg;

  // ---- configuration (paper's headline configuration unless noted) ----
  localparam int unsigned PIX_W    = 8;     // intensity bits
  localparam int unsigned MAX_COLS = 1242;  // image width
  localparam int unsigned MAX_ROWS = 374;   // image height
  localparam int unsigned WIN      = 7;     // census window (WinSize 7x7)
  localparam int unsigned DMAX     = 128;   // disparity range
  localparam int unsigned UF       = 32;    // disparities processed per cycle
  localparam int unsigned NDIR     = 4;     // 0, 45, 90 and 135 degree paths
  localparam int unsigned P1       = 10;    // own choice: small penalty
  localparam int unsigned P2       = 120;   // own choice: large penalty
  localparam int unsigned MED_K    = 3;     // own choice: median window
  localparam int unsigned FIFO_DEPTH = 4;   // own choice: short task FIFO

  // ---- auto-computed data widths ----
  // Bits needed to hold the values 0..n.
  function automatic int unsigned bits_for(input int unsigned n);
    return (n < 2) ? 1 : $clog2(n + 1);
  endfunction

  // Census string length for a k x k window (centre not compared).
  function automatic int unsigned census_bits(input int unsigned k);
    return k * k - 1;
  endfunction

  // Width of a census matching cost (Hamming distance 0..k*k-1).
  function automatic int unsigned census_cost_w(input int unsigned k);
    return bits_for(k * k - 1);
  endfunction

  // Path costs are bounded by Cmax + P2 (the subtracted minimum keeps the
  // recursion from growing).
  function automatic int unsigned path_cost_w(input int unsigned cmax,
                                              input int unsigned p2);
    return bits_for(cmax + p2);
  endfunction

  // Aggregated cost: sum of ndir path costs.
  function automatic int unsigned sum_cost_w(input int unsigned cmax,
                                             input int unsigned p2,
                                             input int unsigned ndir);
    return bits_for(ndir * (cmax + p2));
  endfunction


  // Direction indices used by the aggregation stage.
  typedef enum logic [1:0] {
    DIR_0   = 2'd0,   // from the left neighbour (x-1, y)
    DIR_45  = 2'd1,   // from the upper-left neighbour (x-1, y-1)
    DIR_90  = 2'd2,   // from the upper neighbour (x, y-1)
    DIR_135 = 2'd3    // from the upper-right neighbour (x+1, y-1)
  } dir_e;

endpackage
