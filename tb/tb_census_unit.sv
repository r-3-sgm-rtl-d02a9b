// tb_census_unit: checks census_unit against a reference census transform.
// A small random image (two frames) is streamed one pixel per 3-cycle slot;
// every feature vector, the output count, out_last and the drain are checked.
module tb_census_unit;
  localparam int W = 12, H = 7, WIN = 5, R = WIN / 2, FW = WIN * WIN - 1;
  localparam int N = W * H;

  logic clk = 0, rst_n = 0, slot = 0, in_valid = 0;
  logic [7:0] in_pix = 0;
  logic out_valid, out_last;
  logic [FW-1:0] out_feat;
  int checks = 0, failures = 0;
  logic [7:0] img [H][W];
  int nout = 0, nlast = 0;

  census_unit #(.WIDTH(W), .HEIGHT(H), .WIN(WIN), .PIX_W(8)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [FW-1:0] ref_census(int x, int y);
    logic [FW-1:0] f; int k; f = '0; k = 0;
    for (int r = -R; r <= R; r++)
      for (int c = -R; c <= R; c++)
        if (!(r == 0 && c == 0)) begin
          if (x + c >= 0 && x + c < W && y + r >= 0 && y + r < H)
            f[k] = img[y+r][x+c] < img[y][x];
          k++;
        end
    return f;
  endfunction

  // Output checker.
  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y;
    x = nout % W;
    y = nout / W;
    checks++;
    if (out_feat !== ref_census(x, y)) begin
      failures++;
      $display("census mismatch at (%0d,%0d): %h vs %h", x, y, out_feat, ref_census(x, y));
    end
    checks++;
    if (out_last !== (nout == N - 1)) begin failures++; $display("out_last wrong at %0d", nout); end
    nout = (nout == N - 1) ? 0 : nout + 1;
    if (out_last) nlast++;
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
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = 8'($urandom_range(0, 255));
      if (f == 1) for (int x = 0; x < W; x++) img[3][x] = 8'd100;   // flat row: ties give 0 bits
      for (int i = 0; i < N; i++) begin
        @(negedge clk); slot = 1; in_valid = 1; in_pix = img[i / W][i % W];
        @(negedge clk); slot = 0; in_valid = 0;
        @(negedge clk);
      end
      // drain: slots without data until the frame's last output
      while (nlast == f) begin
        @(negedge clk); slot = 1;
        @(negedge clk); slot = 0;
        @(negedge clk);
      end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (nlast != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
