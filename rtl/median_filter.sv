// median_filter: raster-order WIN x WIN median filter of a disparity map.
//
// Disparities arrive in raster order. A raster_window (WIN-1 line buffers and a
// WIN x WIN window) supplies the neighbourhood of each pixel; the median is
// found by ranking: element i is the median when fewer than K = (WIN*WIN+1)/2
// elements are smaller than it and at least K are smaller or equal. Pixels
// whose window reaches outside the image pass through unfiltered.
// The method names a raster-friendly median filter but not its size or border
// rule: the 3 x 3 window and the pass-through border are choices of this
// implementation.
//
// Interface: one disparity per `in_valid`; `slot` strobes drain the last
// WIDTH*R + R pixels after a frame. `out_valid` pulses two cycles after the
// advance that completes a window, in raster order; `out_last` marks the last
// pixel of a frame.
module median_filter #(
  parameter int unsigned WIDTH  = r3sgm_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT = r3sgm_pkg::IMG_HEIGHT,
  parameter int unsigned WIN    = r3sgm_pkg::MEDIAN_WIN,
  parameter int unsigned DATA_W = $clog2(r3sgm_pkg::NUM_DISP)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              slot,
  input  logic              in_valid,
  input  logic [DATA_W-1:0] in_data,
  output logic              out_valid,
  output logic              out_last,
  output logic [DATA_W-1:0] out_data
);
  localparam int unsigned R  = WIN / 2;
  localparam int unsigned NE = WIN * WIN;
  localparam int unsigned K  = (NE + 1) / 2;
  localparam int unsigned XW = r3sgm_pkg::width_of(WIDTH);
  localparam int unsigned YW = r3sgm_pkg::width_of(HEIGHT);

  logic                                w_valid, w_last;
  logic [WIN-1:0][WIN-1:0][DATA_W-1:0] w;
  logic [XW-1:0]                       w_xc;
  logic [YW-1:0]                       w_yc;
  logic [DATA_W-1:0]                   med;

  raster_window #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .WIN(WIN), .DATA_W(DATA_W)) u_win (
    .clk, .rst_n, .slot, .in_valid, .in_data,
    .out_valid(w_valid), .out_last(w_last), .out_win(w), .out_xc(w_xc), .out_yc(w_yc)
  );

  always_comb begin
    logic [NE-1:0][DATA_W-1:0] e;
    int unsigned lt, le;
    logic border;
    lt = 0;
    le = 0;
    for (int i = 0; i < NE; i++) e[i] = w[i / WIN][i % WIN];
    border = (int'(w_xc) < int'(R)) || (int'(w_xc) + int'(R) >= int'(WIDTH)) ||
             (int'(w_yc) < int'(R)) || (int'(w_yc) + int'(R) >= int'(HEIGHT));
    med = w[R][R];
    if (!border) begin
      for (int i = NE - 1; i >= 0; i--) begin
        lt = 0;
        le = 0;
        for (int j = 0; j < NE; j++) begin
          if (e[j] <  e[i]) lt++;
          if (e[j] <= e[i]) le++;
        end
        if (lt < K && le >= K) med = e[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= w_valid;
      out_last  <= w_last;
      if (w_valid) out_data <= med;
    end
  end

endmodule
