// unary_unit: matching costs (unaries) for both images from census features.
//
// Two rolling buffers, B_L and B_R, hold the census feature vectors of the most
// recent NUM_DISP pixels of the left and right image: entry d holds the feature
// of pixel p - d. After pixel p has entered both buffers the unit computes, as
// Hamming distances,
//   left  unaries of p:          C_L(p, d)        = H(phi_L(p),            phi_R(p - d))
//   right unaries of q = p-dmax: C_R(q, d)        = H(phi_L(q + d),        phi_R(q))
// i.e. the right pixel is scored just before it leaves B_R, when every left
// pixel it can match has been seen. The right stream therefore lags the left
// stream by dmax positions; after the last pixel of a frame the unit drains on
// `slot` strobes, shifting in zero features, to emit the last dmax right pixels.
//
// A disparity whose match lies outside the image row (x - d < 0 on the left,
// x + d >= WIDTH on the right) gets the largest possible cost FEAT_W; this
// border rule is a choice of this implementation.
//
// Interface: features arrive with `in_valid` (at most one per slot); the
// unaries leave two cycles later on `outl_*` (left pixel p) and `outr_*`
// (right pixel p - dmax), both in raster order.
module unary_unit #(
  parameter int unsigned WIDTH    = r3sgm_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT   = r3sgm_pkg::IMG_HEIGHT,
  parameter int unsigned NUM_DISP = r3sgm_pkg::NUM_DISP,
  parameter int unsigned FEAT_W   = r3sgm_pkg::census_bits(r3sgm_pkg::CENSUS_WIN),
  localparam int unsigned CW      = r3sgm_pkg::width_of(FEAT_W)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              slot,
  input  logic                              in_valid,
  input  logic [FEAT_W-1:0]                 in_feat_l,
  input  logic [FEAT_W-1:0]                 in_feat_r,
  output logic                              outl_valid,
  output logic [NUM_DISP-1:0][CW-1:0]       outl_cost,
  output logic                              outr_valid,
  output logic [NUM_DISP-1:0][CW-1:0]       outr_cost
);
  localparam int unsigned DMAX = NUM_DISP - 1;
  localparam int unsigned NPIX = WIDTH * HEIGHT;
  localparam int unsigned PW   = r3sgm_pkg::width_of(NPIX + DMAX);
  localparam int unsigned XW   = r3sgm_pkg::width_of(WIDTH);

  logic [NUM_DISP-1:0][FEAT_W-1:0] bl, br;   // rolling buffers, [d] = pixel p - d
  logic [PW-1:0] ip, cur_ip;
  logic [XW-1:0] xp, cur_x;
  logic          draining, adv, stage;

  assign draining = (ip >= PW'(NPIX));
  assign adv      = in_valid | (slot & draining);

  function automatic logic [CW-1:0] hamming(input logic [FEAT_W-1:0] a, input logic [FEAT_W-1:0] b);
    return CW'($countones(a ^ b));
  endfunction

  // Rolling feature-vector buffers.
  always_ff @(posedge clk) begin
    if (adv) begin
      bl <= {bl[NUM_DISP-2:0], draining ? FEAT_W'(0) : in_feat_l};
      br <= {br[NUM_DISP-2:0], draining ? FEAT_W'(0) : in_feat_r};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ip     <= '0;
      xp     <= '0;
      cur_ip <= '0;
      cur_x  <= '0;
      stage  <= 1'b0;
    end else begin
      stage <= adv;
      if (adv) begin
        cur_ip <= ip;
        cur_x  <= xp;
        ip     <= (ip == PW'(NPIX + DMAX - 1)) ? '0 : ip + 1'b1;
        xp     <= (xp == XW'(WIDTH - 1) || ip == PW'(NPIX + DMAX - 1)) ? '0 : xp + 1'b1;
      end
    end
  end

  // Hamming distances, registered.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      outl_valid <= 1'b0;
      outr_valid <= 1'b0;
    end else begin
      outl_valid <= stage && (cur_ip < PW'(NPIX));
      outr_valid <= stage && (cur_ip >= PW'(DMAX));
    end
  end

  always_ff @(posedge clk) begin
    if (stage) begin
      int xq;
      xq = (int'(cur_x) >= int'(DMAX)) ? int'(cur_x) - int'(DMAX) : int'(cur_x) + int'(WIDTH) - int'(DMAX);
      for (int d = 0; d < NUM_DISP; d++) begin
        outl_cost[d] <= (int'(cur_x) >= d) ? hamming(bl[0], br[d]) : CW'(FEAT_W);
        outr_cost[d] <= (xq + d < int'(WIDTH)) ? hamming(bl[DMAX-d], br[DMAX]) : CW'(FEAT_W);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !draining)
    else $error("unary_unit: feature arrived while draining");

endmodule
