// cost_aggregator: raster-order four-neighbour cost aggregation and WTA for one image.
//
// For pixel p the cost vector is
//   L(p,d) = C(p,d) + 1/4 * sum over x in {left, top-left, top, top-right} of
//            ( min{ L(p-x,d), L(p-x,d-1)+P1, L(p-x,d+1)+P1, minL(p-x)+P2 } - minL(p-x) )
// where minL(q) = min over d' of L(q,d'), which is stored with every cost vector
// so that it is computed only once. All four neighbours precede p in raster
// order, so the whole image is aggregated in a single pass.
//
// Storage follows the window/line-buffer arrangement of the method:
//   * a line buffer with one entry (cost vector + its minimum) per column,
//   * a window buffer holding the three cost vectors above p (TL, T, TR),
//   * a register holding the cost vector of the left neighbour.
// On each pixel the window shifts left (TL <- T, T <- TR) and TR is read from
// the line buffer at column x+1; the new cost vector is written to the line
// buffer at column x, whose old content (the pixel above) is already in the
// window. At the end of a row the line-buffer entry of column 0 is prefetched
// so the next row starts with a single read per pixel.
// Neighbours outside the image contribute a zero cost vector, i.e. a zero term
// (own choice). The sum of the four terms is divided by four with a right
// shift (rounding down, own choice).
//
// Timing: three cycles per pixel, matching one pixel slot.
//   cycle 0 (IDLE, in_valid): latch unaries, shift the window, read TR
//   cycle 1 (AGG):            compute L(p,.) for all d in parallel
//   cycle 2 (MIN):            min / arg-min tree, write line buffer and left register
// `out_valid` rises the cycle after MIN, with the WTA disparity, the minimum and
// the cost vector. `in_ready` is high in IDLE; an input outside IDLE is an error.
module cost_aggregator #(
  parameter int unsigned WIDTH     = r3sgm_pkg::IMG_WIDTH,
  parameter int unsigned HEIGHT    = r3sgm_pkg::IMG_HEIGHT,
  parameter int unsigned NUM_DISP  = r3sgm_pkg::NUM_DISP,
  parameter int unsigned UNARY_MAX = r3sgm_pkg::census_bits(r3sgm_pkg::CENSUS_WIN),
  parameter int unsigned P1        = r3sgm_pkg::PEN_P1,
  parameter int unsigned P2        = r3sgm_pkg::PEN_P2,
  localparam int unsigned UW       = r3sgm_pkg::width_of(UNARY_MAX),
  localparam int unsigned COST_W   = r3sgm_pkg::width_of(UNARY_MAX + P2),
  localparam int unsigned DW       = (NUM_DISP < 2) ? 1 : $clog2(NUM_DISP)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic [NUM_DISP-1:0][UW-1:0]     in_cost,
  output logic                            in_ready,
  output logic                            out_valid,
  output logic [DW-1:0]                   out_disp,
  output logic [COST_W-1:0]               out_min,
  output logic [NUM_DISP-1:0][COST_W-1:0] out_cost
);
  localparam int unsigned DMAX = NUM_DISP - 1;
  localparam int unsigned XW   = r3sgm_pkg::width_of(WIDTH);
  localparam int unsigned YW   = r3sgm_pkg::width_of(HEIGHT);
  localparam int unsigned EW   = COST_W + 2;   // headroom for +P1/+P2 and the sum of four terms

  typedef logic [NUM_DISP-1:0][COST_W-1:0] cvec_t;
  typedef struct packed {
    logic [COST_W-1:0] min;
    cvec_t             vec;
  } centry_t;

  typedef enum logic [1:0] { S_IDLE, S_AGG, S_MIN } state_t;

  state_t                      state;
  centry_t                     lb [WIDTH];          // line buffer
  centry_t                     w_tl, w_t, w_tr;     // window buffer
  centry_t                     left;                // left-neighbour register
  logic [NUM_DISP-1:0][UW-1:0] c_reg;
  cvec_t                       l_reg;
  logic [XW-1:0]               x;
  logic [YW-1:0]               y;
  logic [COST_W-1:0]           tree_min;
  logic [DW-1:0]               tree_idx;
  cvec_t                       l_next;

  assign in_ready = (state == S_IDLE);

  // Aggregated term of one neighbour for disparity d (bounded by P2).
  function automatic logic [EW-1:0] nterm(input centry_t n, input int d);
    logic [EW-1:0] m;
    m = EW'(n.vec[d]);
    if (d > 0    && EW'(n.vec[d-1]) + EW'(P1) < m) m = EW'(n.vec[d-1]) + EW'(P1);
    if (d < DMAX && EW'(n.vec[d+1]) + EW'(P1) < m) m = EW'(n.vec[d+1]) + EW'(P1);
    if (EW'(n.min) + EW'(P2) < m)                  m = EW'(n.min) + EW'(P2);
    return m - EW'(n.min);
  endfunction

  always_comb begin
    centry_t nl, ntl, nt, ntr;
    logic [EW-1:0] s;
    nl  = (x != '0)                                ? left : '0;
    ntl = (y != '0 && x != '0)                     ? w_tl : '0;
    nt  = (y != '0)                                ? w_t  : '0;
    ntr = (y != '0 && x != XW'(WIDTH - 1))         ? w_tr : '0;
    for (int d = 0; d < NUM_DISP; d++) begin
      s = nterm(nl, d) + nterm(ntl, d) + nterm(nt, d) + nterm(ntr, d);
      l_next[d] = COST_W'(EW'(c_reg[d]) + (s >> 2));
    end
  end

  wta_argmin #(.N(NUM_DISP), .W(COST_W)) u_wta (
    .vals(l_reg), .min_val(tree_min), .min_idx(tree_idx)
  );

  // Datapath registers and memories (no reset needed: masked or overwritten before use).
  always_ff @(posedge clk) begin
    case (state)
      S_IDLE: if (in_valid) begin
        c_reg <= in_cost;
        w_tl  <= w_t;
        w_t   <= w_tr;
        w_tr  <= (x != XW'(WIDTH - 1)) ? lb[x + 1'b1] : '0;
      end
      S_AGG: l_reg <= l_next;
      S_MIN: begin
        lb[x]    <= '{min: tree_min, vec: l_reg};
        left     <= '{min: tree_min, vec: l_reg};
        out_disp <= tree_idx;
        out_min  <= tree_min;
        out_cost <= l_reg;
        if (x == XW'(WIDTH - 1)) begin
          // Row end: prefetch column 0 (just computed on this row) for the next row.
          w_t  <= '0;
          w_tr <= lb[0];
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      x         <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) state <= S_AGG;
        S_AGG:  state <= S_MIN;
        S_MIN: begin
          state     <= S_IDLE;
          out_valid <= 1'b1;
          if (x == XW'(WIDTH - 1)) begin
            x <= '0;
            y <= (y == YW'(HEIGHT - 1)) ? '0 : y + 1'b1;
          end else begin
            x <= x + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // One pixel per three cycles: a new pixel may only arrive in IDLE.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> state == S_IDLE)
    else $error("cost_aggregator: unaries arrived while busy");

endmodule
