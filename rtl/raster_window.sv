// raster_window: sliding WIN x WIN window over an image streamed in raster order.
//
// The image arrives one pixel per accepted input. The module keeps WIN-1 line
// buffers (one memory word per column holding the WIN-1 previous rows) and a
// WIN x WIN register window. On every advance the column of the line buffers at
// the input column is shifted up by one row, the new pixel enters the bottom
// row, and the same column (plus the new pixel) enters the right edge of the
// window while the window shifts left. This is the classic raster window
// arrangement used to compute a census feature or a median.
//
// The window centre lags the newest pixel by LAG = R*WIDTH + R positions
// (R = WIN/2). After the last pixel of a frame the module drains itself: on
// each `slot` strobe it advances with a zero pixel until the centre has visited
// every pixel of the frame, then its counters return to the start of a frame.
//
// Interface: `in_valid` must only be raised outside the drain phase and at most
// once per slot. The outputs are registered: `out_valid` pulses one cycle after
// the advance that completes the window centred at (`out_xc`, `out_yc`).
// Window rows and columns that fall outside the image hold stale data; the
// consumer masks them using the centre coordinates. `out_last` marks the last
// centre of a frame.
module raster_window #(
  parameter int unsigned WIDTH  = r3sgm_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT = r3sgm_pkg::IMG_HEIGHT,
  parameter int unsigned WIN    = r3sgm_pkg::CENSUS_WIN,
  parameter int unsigned DATA_W = r3sgm_pkg::PIX_W,
  localparam int unsigned XW    = r3sgm_pkg::width_of(WIDTH),
  localparam int unsigned YW    = r3sgm_pkg::width_of(HEIGHT)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  slot,
  input  logic                                  in_valid,
  input  logic [DATA_W-1:0]                     in_data,
  output logic                                  out_valid,
  output logic                                  out_last,
  output logic [WIN-1:0][WIN-1:0][DATA_W-1:0]   out_win,
  output logic [XW-1:0]                         out_xc,
  output logic [YW-1:0]                         out_yc
);
  localparam int unsigned R     = WIN / 2;
  localparam int unsigned NPIX  = WIDTH * HEIGHT;
  localparam int unsigned LAG   = R * WIDTH + R;
  localparam int unsigned PW    = r3sgm_pkg::width_of(NPIX + LAG);
  localparam int unsigned YIW   = r3sgm_pkg::width_of(HEIGHT + R + 1);

  typedef logic [(WIN-1)*DATA_W-1:0] column_t;

  column_t            lb [WIDTH];      // line buffers, one word per column
  logic [PW-1:0]      ip;              // raster position of the next input
  logic [XW-1:0]      xi;              // its column
  logic [YIW-1:0]     yi;              // its row (runs past HEIGHT while draining)
  logic               draining;
  logic               adv;
  logic [DATA_W-1:0]  new_px;
  column_t            col;

  assign draining = (ip >= PW'(NPIX));
  assign adv      = in_valid | (slot & draining);
  assign new_px   = draining ? '0 : in_data;
  assign col      = lb[xi];

  always_ff @(posedge clk) begin
    if (adv) begin
      // Line buffers: shift this column up one row, new pixel at the bottom.
      if (WIN > 2)
        lb[xi] <= {new_px, col[(WIN-1)*DATA_W-1:DATA_W]};
      else
        lb[xi] <= column_t'(new_px);
      // Window buffer: shift left, load the right-hand column.
      for (int r = 0; r < WIN; r++) begin
        for (int c = 0; c < WIN - 1; c++)
          out_win[r][c] <= out_win[r][c+1];
        out_win[r][WIN-1] <= (r == WIN - 1) ? new_px : col[r*DATA_W +: DATA_W];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ip        <= '0;
      xi        <= '0;
      yi        <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_xc    <= '0;
      out_yc    <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (adv) begin
        out_valid <= (ip >= PW'(LAG));
        out_last  <= (ip == PW'(NPIX + LAG - 1));
        // Centre of the window after this shift: position ip - LAG.
        if (xi >= XW'(R)) begin
          out_xc <= XW'(xi - XW'(R));
          out_yc <= YW'(yi - YIW'(R));
        end else begin
          out_xc <= XW'(xi + XW'(WIDTH - R));
          out_yc <= YW'(yi - YIW'(R + 1));
        end
        if (ip == PW'(NPIX + LAG - 1)) begin
          ip <= '0;
          xi <= '0;
          yi <= '0;
        end else begin
          ip <= ip + 1'b1;
          if (xi == XW'(WIDTH - 1)) begin
            xi <= '0;
            yi <= yi + 1'b1;
          end else begin
            xi <= xi + 1'b1;
          end
        end
      end
    end
  end

  // Inputs are refused by the sequencer while this stage drains.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !draining)
    else $error("raster_window: input pixel arrived while draining");

endmodule
