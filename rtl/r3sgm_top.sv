// r3sgm_top: raster-order stereo matcher with four-neighbour cost aggregation.
//
// A rectified stereo pair streams in as pixel pairs in raster order and
// left-image disparities, validated by a left-right check, stream out in
// raster order, with no frame buffer. The pipeline:
//
//   left pixels  -> census_unit --+                        +-> cost_aggregator (L) -> median_filter (L) --+
//                                 +-> unary_unit (B_L,B_R) +                                              +-> lr_check -> out
//   right pixels -> census_unit --+                        +-> cost_aggregator (R) -> median_filter (R) --+
//
// The census units produce W x W census vectors; the unary unit turns them into
// Hamming-distance matching costs for all NUM_DISP disparities of left pixel p
// and of right pixel p - dmax; each cost aggregator combines the unaries with
// the cost vectors of the left, top-left, top and top-right neighbours, keeps
// them in a line buffer and picks the winner-takes-all disparity; the median
// filters smooth both maps and the LR check keeps consistent left disparities.
//
// Timing: one pixel pair per slot of CYCLES_PER_PIXEL (3) clock cycles, set by
// the frame_sequencer. `in_ready` is high in the first cycle of a slot while a
// frame is being accepted; after the last pixel of a frame it stays low until
// the pipeline has drained and the last disparity has left. Each stage works
// on its own raster position counters; the sequencer's slot phases drive the
// drain of the windowed stages, offset by each stage's latency (census 0,
// unary 2, median 7 cycles after the input slot).
//
// Outputs: `out_valid` per left pixel with the median-filtered left disparity
// `out_disp` and `out_ok` (LR check passed); `outr_valid`/`outr_disp` carry the
// median-filtered right disparity map. `out_last` marks a frame's last pixel.
module r3sgm_top #(
  parameter int unsigned WIDTH            = r3sgm_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT           = r3sgm_pkg::IMG_HEIGHT,
  parameter int unsigned NUM_DISP         = r3sgm_pkg::NUM_DISP,
  parameter int unsigned CENSUS_WIN       = r3sgm_pkg::CENSUS_WIN,
  parameter int unsigned PIX_W            = r3sgm_pkg::PIX_W,
  parameter int unsigned P1               = r3sgm_pkg::PEN_P1,
  parameter int unsigned P2               = r3sgm_pkg::PEN_P2,
  parameter int unsigned MEDIAN_WIN       = r3sgm_pkg::MEDIAN_WIN,
  parameter int unsigned CYCLES_PER_PIXEL = r3sgm_pkg::CYCLES_PER_PIXEL,
  localparam int unsigned DW              = (NUM_DISP < 2) ? 1 : $clog2(NUM_DISP)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [PIX_W-1:0] in_left,
  input  logic [PIX_W-1:0] in_right,
  output logic             out_valid,
  output logic             out_last,
  output logic [DW-1:0]    out_disp,
  output logic             out_ok,
  output logic             outr_valid,
  output logic [DW-1:0]    outr_disp,
  output logic             draining
);
  localparam int unsigned NPIX   = WIDTH * HEIGHT;
  localparam int unsigned FEAT_W = r3sgm_pkg::census_bits(CENSUS_WIN);
  localparam int unsigned UW     = r3sgm_pkg::width_of(FEAT_W);
  localparam int unsigned COST_W = r3sgm_pkg::width_of(FEAT_W + P2);
  // Cycle offsets of each stage's input within a slot.
  localparam int unsigned PH_UNARY  = 2 % CYCLES_PER_PIXEL;
  localparam int unsigned PH_MEDIAN = 7 % CYCLES_PER_PIXEL;

  logic [CYCLES_PER_PIXEL-1:0] slot_phase;
  logic accept, frame_done;

  frame_sequencer #(.CYCLES_PER_PIXEL(CYCLES_PER_PIXEL), .NUM_PIXELS(NPIX)) u_seq (
    .clk, .rst_n, .src_valid(in_valid), .src_ready(in_ready), .accept,
    .frame_done, .slot_phase, .draining
  );

  // Census transform of both images.
  logic              ct_valid_l, ct_valid_r, ct_last_l, ct_last_r;
  logic [FEAT_W-1:0] feat_l, feat_r;

  census_unit #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .WIN(CENSUS_WIN), .PIX_W(PIX_W)) u_ct_l (
    .clk, .rst_n, .slot(slot_phase[0]), .in_valid(accept), .in_pix(in_left),
    .out_valid(ct_valid_l), .out_last(ct_last_l), .out_feat(feat_l)
  );
  census_unit #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .WIN(CENSUS_WIN), .PIX_W(PIX_W)) u_ct_r (
    .clk, .rst_n, .slot(slot_phase[0]), .in_valid(accept), .in_pix(in_right),
    .out_valid(ct_valid_r), .out_last(ct_last_r), .out_feat(feat_r)
  );

  // Rolling feature buffers and Hamming-distance unaries.
  logic                          un_valid_l, un_valid_r;
  logic [NUM_DISP-1:0][UW-1:0]   un_l, un_r;

  unary_unit #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .NUM_DISP(NUM_DISP), .FEAT_W(FEAT_W)) u_unary (
    .clk, .rst_n, .slot(slot_phase[PH_UNARY]), .in_valid(ct_valid_l),
    .in_feat_l(feat_l), .in_feat_r(feat_r),
    .outl_valid(un_valid_l), .outl_cost(un_l), .outr_valid(un_valid_r), .outr_cost(un_r)
  );

  // Cost aggregation and WTA, one per image.
  logic                              ag_valid_l, ag_valid_r, ag_ready_l, ag_ready_r;
  logic [DW-1:0]                     ag_disp_l, ag_disp_r;
  logic [COST_W-1:0]                 ag_min_l, ag_min_r;
  logic [NUM_DISP-1:0][COST_W-1:0]   ag_cost_l, ag_cost_r;

  cost_aggregator #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .NUM_DISP(NUM_DISP), .UNARY_MAX(FEAT_W),
                    .P1(P1), .P2(P2)) u_agg_l (
    .clk, .rst_n, .in_valid(un_valid_l), .in_cost(un_l), .in_ready(ag_ready_l),
    .out_valid(ag_valid_l), .out_disp(ag_disp_l), .out_min(ag_min_l), .out_cost(ag_cost_l)
  );
  cost_aggregator #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .NUM_DISP(NUM_DISP), .UNARY_MAX(FEAT_W),
                    .P1(P1), .P2(P2)) u_agg_r (
    .clk, .rst_n, .in_valid(un_valid_r), .in_cost(un_r), .in_ready(ag_ready_r),
    .out_valid(ag_valid_r), .out_disp(ag_disp_r), .out_min(ag_min_r), .out_cost(ag_cost_r)
  );

  // Median filtering of both disparity maps.
  logic          md_valid_l, md_valid_r, md_last_l, md_last_r;
  logic [DW-1:0] md_l, md_r;

  median_filter #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .WIN(MEDIAN_WIN), .DATA_W(DW)) u_med_l (
    .clk, .rst_n, .slot(slot_phase[PH_MEDIAN]), .in_valid(ag_valid_l), .in_data(ag_disp_l),
    .out_valid(md_valid_l), .out_last(md_last_l), .out_data(md_l)
  );
  median_filter #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .WIN(MEDIAN_WIN), .DATA_W(DW)) u_med_r (
    .clk, .rst_n, .slot(slot_phase[PH_MEDIAN]), .in_valid(ag_valid_r), .in_data(ag_disp_r),
    .out_valid(md_valid_r), .out_last(md_last_r), .out_data(md_r)
  );

  // Left-right consistency check.
  lr_check #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .NUM_DISP(NUM_DISP)) u_lr (
    .clk, .rst_n, .l_valid(md_valid_l), .l_disp(md_l), .r_valid(md_valid_r), .r_disp(md_r),
    .out_valid, .out_last, .out_disp, .out_ok
  );

  assign frame_done = out_last;
  assign outr_valid = md_valid_r;
  assign outr_disp  = md_r;

  // The cost aggregators must never be offered a pixel while busy.
  assert property (@(posedge clk) disable iff (!rst_n) un_valid_l |-> ag_ready_l)
    else $error("r3sgm_top: left cost aggregator overrun");
  assert property (@(posedge clk) disable iff (!rst_n) un_valid_r |-> ag_ready_r)
    else $error("r3sgm_top: right cost aggregator overrun");

  if (CYCLES_PER_PIXEL < 3) begin : g_bad_cpp
    $error("r3sgm_top: the cost recursion needs at least three cycles per pixel");
  end

endmodule
