// r3sgm_pkg: constants and helper functions shared by the raster-order stereo
// pipeline (census unaries, four-neighbour cost aggregation, WTA, median, LR check).
//
// The defaults describe the main configuration: KITTI-sized frames of
// 1242 x 375 pixels, 128 disparities (d = 0..127), a 13 x 13 census window and
// one pixel every three clock cycles. The smoothness penalties P1 and P2, the
// pixel width and the 3 x 3 median window are not specified by the method and
// are choices of this implementation.
package r3sgm_pkg;

  // Image geometry (KITTI configuration).
  parameter int unsigned IMG_WIDTH        = 1242;
  parameter int unsigned IMG_HEIGHT       = 375;
  // Disparity range D = [0, dmax], dmax + 1 = 128 disparities.
  parameter int unsigned NUM_DISP         = 128;
  // Census window width W (13 in the configuration with the best accuracy).
  parameter int unsigned CENSUS_WIN       = 13;
  // Grey-level pixel width (own choice: 8-bit camera pixels).
  parameter int unsigned PIX_W            = 8;
  // Smoothness penalties (own choice; P1 < P2 as the method requires).
  parameter int unsigned PEN_P1           = 10;
  parameter int unsigned PEN_P2           = 80;
  // Median filter window (own choice: 3 x 3).
  parameter int unsigned MEDIAN_WIN       = 3;
  // Clock cycles per pixel slot: one disparity pair per three clocks.
  parameter int unsigned CYCLES_PER_PIXEL = 3;

  // Width of a value that must hold 0..n.
  function automatic int unsigned width_of(input int unsigned n);
    return (n < 2) ? 1 : $clog2(n + 1);
  endfunction

  // Number of census bits for a W x W window (centre excluded).
  function automatic int unsigned census_bits(input int unsigned win);
    return win * win - 1;
  endfunction

  // Width of an aggregated cost: L(p,d) <= C_max + P2 (each averaged
  // neighbour term is bounded by P2 because the min over d' is subtracted).
  function automatic int unsigned cost_width(input int unsigned win, input int unsigned p2);
    return width_of(census_bits(win) + p2);
  endfunction

endpackage
