// tb_median_filter: checks the raster-order 3 x 3 median filter against a
// reference median computed from the stored map (pass-through on the border),
// over two frames, including the drain after each frame and out_last.
module tb_median_filter;
  localparam int W = 9, H = 6, DW = 4;
  localparam int N = W * H;

  logic clk = 0, rst_n = 0, slot = 0, in_valid = 0;
  logic [DW-1:0] in_data = 0;
  logic out_valid, out_last;
  logic [DW-1:0] out_data;
  int checks = 0, failures = 0, changed = 0;
  int img [H][W];
  int nout = 0, nlast = 0;

  median_filter #(.WIDTH(W), .HEIGHT(H), .WIN(3), .DATA_W(DW)) dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_med(int x, int y);
    int v [9]; int t;
    if (x == 0 || y == 0 || x == W - 1 || y == H - 1) return img[y][x];
    for (int i = 0; i < 9; i++) v[i] = img[y - 1 + i / 3][x - 1 + i % 3];
    for (int i = 0; i < 9; i++)
      for (int j = 0; j < 8 - i; j++)
        if (v[j] > v[j+1]) begin t = v[j]; v[j] = v[j+1]; v[j+1] = t; end
    return v[4];
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y, e;
    x = nout % W; y = nout / W; e = ref_med(x, y);
    checks += 2;
    if (out_data != DW'(e)) begin
      failures++;
      $display("median mismatch at (%0d,%0d): %0d vs %0d", x, y, out_data, e);
    end
    if (e != img[y][x]) changed++;
    if (out_last !== (nout == N - 1)) begin failures++; $display("out_last wrong at %0d", nout); end
    if (out_last) nlast++;
    nout = (nout == N - 1) ? 0 : nout + 1;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          img[y][x] = (f == 0) ? $urandom_range(0, 15) : (($urandom_range(0, 9) == 0) ? 15 : 5);
      for (int i = 0; i < N; i++) begin
        @(negedge clk); slot = 1; in_valid = 1; in_data = DW'(img[i / W][i % W]);
        @(negedge clk); slot = 0; in_valid = 0;
        @(negedge clk);
      end
      while (nlast == f) begin
        @(negedge clk); slot = 1;
        @(negedge clk); slot = 0;
        @(negedge clk);
      end
    end
    checks++;
    if (changed == 0) begin failures++; $display("median never changed a value"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
