// wta_argmin: minimum and index of the minimum of a cost vector.
//
// A balanced binary comparison tree over N values (padded with the largest
// value up to a power of two). At each node the left operand wins ties, so the
// result is the smallest index holding the minimum. The minimum is the value
// the cost recursion stores for each pixel; the index is the winner-takes-all
// disparity. Purely combinational; its depth (log2 N comparators) is the
// critical path of the per-pixel recursion.
module wta_argmin #(
  parameter int unsigned N = r3sgm_pkg::NUM_DISP,
  parameter int unsigned W = r3sgm_pkg::cost_width(r3sgm_pkg::CENSUS_WIN, r3sgm_pkg::PEN_P2),
  localparam int unsigned IW = (N < 2) ? 1 : $clog2(N)
) (
  input  logic [N-1:0][W-1:0] vals,
  output logic [W-1:0]        min_val,
  output logic [IW-1:0]       min_idx
);
  localparam int unsigned LEVELS = (N < 2) ? 0 : $clog2(N);
  localparam int unsigned P      = 1 << LEVELS;

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned M = P >> l;
    logic [W-1:0]  v   [M];
    logic [IW-1:0] idx [M];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < M; i++) begin : g_i
        if (i < N) begin : g_real
          assign v[i]   = vals[i];
        end else begin : g_pad
          assign v[i]   = '1;
        end
        assign idx[i] = IW'(i);
      end
    end else begin : g_node
      for (genvar i = 0; i < M; i++) begin : g_i
        wire take_right = g_lvl[l-1].v[2*i+1] < g_lvl[l-1].v[2*i];
        assign v[i]   = take_right ? g_lvl[l-1].v[2*i+1]   : g_lvl[l-1].v[2*i];
        assign idx[i] = take_right ? g_lvl[l-1].idx[2*i+1] : g_lvl[l-1].idx[2*i];
      end
    end
  end

  assign min_val = g_lvl[LEVELS].v[0];
  assign min_idx = g_lvl[LEVELS].idx[0];

endmodule
