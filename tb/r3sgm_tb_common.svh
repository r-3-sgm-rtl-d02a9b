// Shared body of the end-to-end testbenches of r3sgm_top.
// Before inclusion the including module defines: W, H, ND, CWIN, D_BG, D_BOX,
// NFRAMES, STANDALONE and instantiates the top as `dut` (ports named as below).
// A standalone testbench prints TB_RESULT and finishes; otherwise the body
// raises `run_done` and leaves the totals in `checks` and `failures`.
//
// Stimulus: a synthetic rectified pair. The right image is random texture; the
// left image is the right image shifted by the true disparity, D_BG on the
// background and D_BOX inside a rectangle, so left pixel (x,y) shows right
// pixel (x - d, y). The left columns x < d have no match and are fresh texture.
//
// Checks: every frame yields exactly W*H outputs in raster order with out_last
// on the last; pixels away from the image border and the rectangle's edges
// must be LR-valid and equal to the true disparity (at least 90% of them);
// pixels are accepted exactly one per three cycles inside a frame, and a frame
// takes no more than 3 cycles per pixel plus the drain of the stage lags. The
// mechanisms of the design are counted and each must occur: input refused
// while the pipeline drains, unaries of out-of-row matches, LR rejections,
// LR acceptances and values changed by the median filter.

  localparam int N = W * H;
  localparam int DW = $clog2(ND);
  localparam int FEAT_W = CWIN * CWIN - 1;
  // Cycles from the first accepted pixel to the last disparity: one slot per
  // pixel plus the drain slots (census, right-unary and median lags) and the
  // pipeline depth.
  localparam int MAX_FRAME_CYCLES = 3 * (N + (CWIN / 2) * W + CWIN / 2 + ND - 1 + W + 1) + 12;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [7:0] in_left = 0, in_right = 0;
  logic in_ready, out_valid, out_last, out_ok, outr_valid, draining;
  logic [DW-1:0] out_disp, outr_disp;

  int checks = 0, failures = 0;
  int cyc = 0, last_acc = -1, nacc = 0, nout = 0, frames = 0;
  int n_stall = 0, n_border_unary = 0, n_lr_rej = 0, n_lr_ok = 0, n_median = 0;
  int n_eval = 0, n_good = 0, first_acc = 0, last_out = 0;
  logic run_done = 0;
  byte unsigned limg [H][W];
  byte unsigned rimg [H][W];
  int dtrue [H][W];

  always #5 clk = ~clk;

  function automatic bit in_box(int x, int y);
    return x >= W / 2 && x < W / 2 + W / 5 && y >= H / 4 && y < H / 2 + H / 4;
  endfunction

  task automatic make_images();
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        rimg[y][x] = 8'($urandom_range(0, 255));
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        dtrue[y][x] = in_box(x, y) ? D_BOX : D_BG;
        limg[y][x]  = (x - dtrue[y][x] >= 0) ? rimg[y][x - dtrue[y][x]] : 8'($urandom_range(0, 255));
      end
  endtask

  // A pixel is evaluated when its true disparity is unambiguous: away from
  // the left band without matches, the image border and the box edges.
  function automatic bit evaluated(int x, int y);
    int m, x0, x1, y0, y1, bx0, bx1, by0, by1;
    bit inside_all, outside_all;
    m = CWIN;
    if (x < D_BOX + m || x >= W - m || y < m || y >= H - m) return 0;
    x0 = x - (D_BOX + m); x1 = x + m; y0 = y - m; y1 = y + m;
    bx0 = W / 2; bx1 = W / 2 + W / 5 - 1; by0 = H / 4; by1 = H / 2 + H / 4 - 1;
    inside_all  = x0 >= bx0 && x1 <= bx1 && y0 >= by0 && y1 <= by1;
    outside_all = x1 < bx0 || x0 > bx1 || y1 < by0 || y0 > by1;
    return inside_all || outside_all;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid && in_ready) begin
      if (nacc % N != 0) begin
        checks++;
        if (cyc - last_acc != 3) begin failures++; $display("accept interval %0d", cyc - last_acc); end
      end else first_acc = cyc;
      last_acc = cyc;
      nacc++;
    end
    if (in_valid && !in_ready && draining) n_stall++;
    if (dut.un_valid_l && dut.un_l[ND-1] == FEAT_W[$bits(dut.un_l[0])-1:0]) n_border_unary++;
    if (dut.u_med_l.w_valid && dut.u_med_l.med != dut.u_med_l.w[1][1]) n_median++;
    if (out_valid) begin
      int x, y;
      x = nout % W; y = nout / W;
      if (out_ok) n_lr_ok++; else n_lr_rej++;
      if (evaluated(x, y)) begin
        n_eval++;
        if (out_ok && int'(out_disp) == dtrue[y][x]) n_good++;
      end
      checks++;
      if (out_last !== (nout == N - 1)) begin failures++; $display("out_last wrong at %0d", nout); end
      if (nout == N - 1) begin
        frames++;
        last_out = cyc;
        $display("%0dx%0d, %0d disparities, %0dx%0d census, frame %0d: %0d cycles from first pixel to last disparity (3 x %0d pixels = %0d; limit %0d)",
                 W, H, ND, CWIN, CWIN, frames, last_out - first_acc, N, 3 * N, MAX_FRAME_CYCLES);
        checks++;
        if (last_out - first_acc > MAX_FRAME_CYCLES) begin failures++; $display("frame too slow"); end
        nout = 0;
      end else nout++;
    end
  end

  initial begin
    rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int f = 0; f < NFRAMES; f++) begin
      make_images();
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        in_valid = 1; in_left = limg[i / W][i % W]; in_right = rimg[i / W][i % W];
        while (!in_ready) @(negedge clk);
        @(posedge clk);
      end
      // keep offering the next frame's first pixel while the pipeline drains
      @(negedge clk); in_left = 0; in_right = 0;
      while (frames == f) @(negedge clk);
      in_valid = 0;
    end
    repeat (10) @(negedge clk);
    checks += 7;
    if (n_eval == 0 || n_good * 10 < n_eval * 9) begin
      failures++; $display("accuracy: %0d of %0d evaluated pixels correct", n_good, n_eval);
    end
    if (frames != NFRAMES)    begin failures++; $display("frames %0d", frames); end
    if (n_stall == 0)         begin failures++; $display("never stalled the input while draining"); end
    if (n_border_unary == 0)  begin failures++; $display("no out-of-row unaries"); end
    if (n_lr_rej == 0)        begin failures++; $display("LR check never rejected"); end
    if (n_lr_ok == 0)         begin failures++; $display("LR check never accepted"); end
    if (n_median == 0)        begin failures++; $display("median filter never changed a value"); end
    $display("correct %0d of %0d evaluated; stalls %0d, border unaries %0d, LR ok %0d / rejected %0d, median changes %0d",
             n_good, n_eval, n_stall, n_border_unary, n_lr_ok, n_lr_rej, n_median);
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    run_done = 1;
  end
