// tb_lr_check: checks the left-right consistency test against a reference.
// A left and a right disparity map are streamed with the right stream trailing
// the left one by dmax positions (as in the full pipeline); every result is
// compared with |dL - dR| <= max(1, 3% dL) evaluated on the stored maps, with
// matches falling left of the image rejected. Both outcomes must occur.
module tb_lr_check;
  localparam int W = 16, H = 4, ND = 64, DW = 6, DMAX = ND - 1;
  localparam int N = W * H;

  logic clk = 0, rst_n = 0, l_valid = 0, r_valid = 0;
  logic [DW-1:0] l_disp = 0, r_disp = 0;
  logic out_valid, out_last, out_ok;
  logic [DW-1:0] out_disp;
  int checks = 0, failures = 0, n_ok = 0, n_rej = 0, n_edge = 0;
  int dl [N], dr [N];
  int nout = 0;

  lr_check #(.WIDTH(W), .HEIGHT(H), .NUM_DISP(ND)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && out_valid) begin
    int x, d, e, diff;
    x = nout % W; d = dl[nout];
    if (x - d < 0) begin e = 0; n_edge++; end
    else begin
      diff = d - dr[nout - d]; if (diff < 0) diff = -diff;
      e = (diff <= 1 || 100 * diff <= 3 * d) ? 1 : 0;
    end
    checks += 3;
    if (out_ok != e[0]) begin failures++; $display("lr mismatch p=%0d d=%0d: %0d vs %0d", nout, d, out_ok, e); end
    if (out_disp != DW'(d)) begin failures++; $display("disp mismatch p=%0d", nout); end
    if (out_last !== (nout == N - 1)) begin failures++; $display("out_last wrong p=%0d", nout); end
    if (e == 1) n_ok++; else n_rej++;
    nout++;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < N; p++) begin
      dl[p] = (p % W < 4) ? $urandom_range(0, 6) : $urandom_range(0, p % W);
      dr[p] = $urandom_range(0, 63);
    end
    // make a good share of pixels consistent (within 1 or 3%)
    for (int p = 0; p < N; p++) if (p % 2 == 0 && p % W >= dl[p]) dr[p - dl[p]] = dl[p] + ((p % 4 == 0) ? 1 : 0);
    // pixels whose match falls left of the image: make the wrapped-around
    // right pixel (previous row) consistent, so only the edge test rejects them
    for (int p = 0; p < N; p++) if (p % W < dl[p] && p - dl[p] >= 0) dr[p - dl[p]] = dl[p];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // left leads right by DMAX positions; slots of 3 cycles
    for (int t = 0; t < N + DMAX; t++) begin
      @(negedge clk);
      l_valid = (t < N);           if (t < N) l_disp = DW'(dl[t]);
      r_valid = (t >= DMAX);       if (t >= DMAX) r_disp = DW'(dr[t - DMAX]);
      @(negedge clk); l_valid = 0; r_valid = 0;
      @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks += 3;
    if (nout != N) begin failures++; $display("count %0d", nout); end
    if (n_ok == 0 || n_rej == 0) begin failures++; $display("ok %0d rej %0d", n_ok, n_rej); end
    if (n_edge == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
