// census_unit: Census Transform feature vector of every pixel of one image.
//
// Pixels arrive in raster order. A raster_window keeps W-1 line buffers and a
// W x W window buffer (the window is read ahead of the centre by W/2 rows and
// W/2 columns). For the centre pixel p the feature vector has one bit per
// other window position, taken in raster order over the window with the
// centre skipped: the bit is 1 when that neighbour is darker than p. Window
// positions that fall outside the image give 0 bits (own choice; the border
// rule is not specified by the method).
//
// Interface: one pixel per `in_valid`; `slot` strobes drive the drain after the
// last pixel of a frame. `out_valid` pulses two cycles after the advance that
// completes a window, with `out_feat` for the pixels in raster order.
module census_unit #(
  parameter int unsigned WIDTH  = r3sgm_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT = r3sgm_pkg::IMG_HEIGHT,
  parameter int unsigned WIN    = r3sgm_pkg::CENSUS_WIN,
  parameter int unsigned PIX_W  = r3sgm_pkg::PIX_W,
  localparam int unsigned FEAT_W = r3sgm_pkg::census_bits(WIN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              slot,
  input  logic              in_valid,
  input  logic [PIX_W-1:0]  in_pix,
  output logic              out_valid,
  output logic              out_last,
  output logic [FEAT_W-1:0] out_feat
);
  localparam int unsigned R  = WIN / 2;
  localparam int unsigned XW = r3sgm_pkg::width_of(WIDTH);
  localparam int unsigned YW = r3sgm_pkg::width_of(HEIGHT);

  logic                               w_valid, w_last;
  logic [WIN-1:0][WIN-1:0][PIX_W-1:0] w;
  logic [XW-1:0]                      w_xc;
  logic [YW-1:0]                      w_yc;
  logic [FEAT_W-1:0]                  feat;

  raster_window #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .WIN(WIN), .DATA_W(PIX_W)) u_win (
    .clk, .rst_n, .slot, .in_valid, .in_data(in_pix),
    .out_valid(w_valid), .out_last(w_last), .out_win(w), .out_xc(w_xc), .out_yc(w_yc)
  );

  always_comb begin
    int unsigned k;
    int          x, y;
    logic        in_img;
    k    = 0;
    feat = '0;
    for (int r = 0; r < WIN; r++) begin
      for (int c = 0; c < WIN; c++) begin
        if (!(r == R && c == R)) begin
          x      = int'(w_xc) - int'(R) + c;
          y      = int'(w_yc) - int'(R) + r;
          in_img = (x >= 0) && (x < int'(WIDTH)) && (y >= 0) && (y < int'(HEIGHT));
          feat[k] = in_img && (w[r][c] < w[R][R]);
          k++;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_feat  <= '0;
    end else begin
      out_valid <= w_valid;
      out_last  <= w_last;
      if (w_valid) out_feat <= feat;
    end
  end

endmodule
