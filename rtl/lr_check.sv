// lr_check: left-right consistency check of the two disparity maps.
//
// A left pixel (x, y) with disparity dL matches right pixel (x - dL, y). The
// match is kept when that right pixel lies inside the image and its disparity
// dR satisfies |dL - dR| <= max(1, 3% of dL), evaluated exactly as
// |dL - dR| <= 1  or  100*|dL - dR| <= 3*dL. The threshold follows the method;
// taking 3% of the left disparity is this implementation's reading.
//
// In the pipeline the right disparities trail the left ones by dmax pixel
// positions. Left disparities are therefore parked in a circular buffer of
// FIFO_DEPTH entries, and the last dmax+1 right disparities are kept in a shift
// register. When right pixel q arrives, left pixel q is taken from the buffer
// and checked against the right disparity at q - dL (shift-register tap dL).
//
// Interface: `l_valid`/`l_disp` and `r_valid`/`r_disp` are two raster-order
// streams of the same frame size; left pixel q must arrive before right pixel
// q. One result per right pixel: `out_valid` with the left disparity `out_disp`
// and `out_ok` (passed the check), one cycle after `r_valid`; `out_last` marks
// the last pixel of a frame.
module lr_check #(
  parameter int unsigned WIDTH      = r3sgm_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT     = r3sgm_pkg::IMG_HEIGHT,
  parameter int unsigned NUM_DISP   = r3sgm_pkg::NUM_DISP,
  parameter int unsigned FIFO_DEPTH = 1 << $clog2(2 * r3sgm_pkg::NUM_DISP),
  localparam int unsigned DW        = (NUM_DISP < 2) ? 1 : $clog2(NUM_DISP)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          l_valid,
  input  logic [DW-1:0] l_disp,
  input  logic          r_valid,
  input  logic [DW-1:0] r_disp,
  output logic          out_valid,
  output logic          out_last,
  output logic [DW-1:0] out_disp,
  output logic          out_ok
);
  localparam int unsigned AW   = $clog2(FIFO_DEPTH);
  localparam int unsigned XW   = r3sgm_pkg::width_of(WIDTH);
  localparam int unsigned YW   = r3sgm_pkg::width_of(HEIGHT);

  logic [DW-1:0]                lbuf [FIFO_DEPTH];
  logic [AW:0]                  wr_ptr, rd_ptr, level;
  logic [NUM_DISP-2:0][DW-1:0]  rs;          // rs[k] = right disparity of q - 1 - k
  logic [XW-1:0]                xq;
  logic [YW-1:0]                yq;
  logic [DW-1:0]                dl, dr, diff;
  logic                         ok;

  assign level = wr_ptr - rd_ptr;
  assign dl    = lbuf[rd_ptr[AW-1:0]];

  always_comb begin
    logic [NUM_DISP-1:0][DW-1:0] taps;
    taps = {rs, r_disp};       // taps[k] = right disparity of q - k
    dr   = taps[dl];
    diff = (dl > dr) ? dl - dr : dr - dl;
    ok   = (int'(xq) >= int'(dl)) &&
           ((diff <= 1) || (100 * int'(diff) <= 3 * int'(dl)));
  end

  always_ff @(posedge clk) begin
    if (l_valid) lbuf[wr_ptr[AW-1:0]] <= l_disp;
    if (r_valid) begin
      rs[0] <= r_disp;
      for (int k = 1; k < NUM_DISP - 1; k++) rs[k] <= rs[k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      xq        <= '0;
      yq        <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_disp  <= '0;
      out_ok    <= 1'b0;
    end else begin
      out_valid <= r_valid;
      out_last  <= 1'b0;
      if (l_valid) wr_ptr <= wr_ptr + 1'b1;
      if (r_valid) begin
        rd_ptr   <= rd_ptr + 1'b1;
        out_disp <= dl;
        out_ok   <= ok;
        out_last <= (xq == XW'(WIDTH - 1)) && (yq == YW'(HEIGHT - 1));
        if (xq == XW'(WIDTH - 1)) begin
          xq <= '0;
          yq <= (yq == YW'(HEIGHT - 1)) ? '0 : yq + 1'b1;
        end else begin
          xq <= xq + 1'b1;
        end
      end
    end
  end

  // Left pixel q must already be buffered when right pixel q arrives, and the
  // buffer must never overflow.
  assert property (@(posedge clk) disable iff (!rst_n) r_valid |-> level != 0)
    else $error("lr_check: right disparity arrived before its left disparity");
  assert property (@(posedge clk) disable iff (!rst_n) l_valid |-> level < (AW+1)'(FIFO_DEPTH))
    else $error("lr_check: left-disparity buffer overflow");

endmodule
