// tb_unary_unit: checks the rolling buffers and Hamming unaries of unary_unit.
// Random census features for two small frames are streamed one per 3-cycle
// slot; every left and right unary vector is compared with a reference
// computed from the feature arrays, including the out-of-row cost, the
// 2-cycle latency and the dmax-pixel drain of the right stream.
module tb_unary_unit;
  localparam int W = 20, H = 3, ND = 8, DMAX = ND - 1, FW = 24, CW = 5;
  localparam int N = W * H;

  logic clk = 0, rst_n = 0, slot = 0, in_valid = 0;
  logic [FW-1:0] in_feat_l = 0, in_feat_r = 0;
  logic outl_valid, outr_valid;
  logic [ND-1:0][CW-1:0] outl_cost, outr_cost;
  int checks = 0, failures = 0;
  logic [FW-1:0] fl [N], fr [N];
  int nl = 0, nr = 0, cyc = 0, last_in_cyc = 0, frames_done = 0;

  unary_unit #(.WIDTH(W), .HEIGHT(H), .NUM_DISP(ND), .FEAT_W(FW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (in_valid) last_in_cyc = cyc;

  function automatic int popc(logic [FW-1:0] v);
    int n = 0;
    for (int i = 0; i < FW; i++) n += v[i];
    return n;
  endfunction

  always @(posedge clk) begin
    int x, e;
    if (rst_n && outl_valid) begin
      for (int d = 0; d < ND; d++) begin
        x = nl % W;
        e = (x >= d) ? popc(fl[nl] ^ fr[nl-d]) : FW;
        checks++;
        if (outl_cost[d] != CW'(e)) begin
          failures++;
          $display("left unary p=%0d d=%0d: %0d vs %0d", nl, d, outl_cost[d], e);
        end
      end
      checks++;
      if (cyc - last_in_cyc != 2) begin failures++; $display("left latency %0d", cyc - last_in_cyc); end
      nl = (nl == N - 1) ? 0 : nl + 1;
    end
    if (rst_n && outr_valid) begin
      for (int d = 0; d < ND; d++) begin
        x = nr % W;
        e = (x + d < W) ? popc(fl[nr+d] ^ fr[nr]) : FW;
        checks++;
        if (outr_cost[d] != CW'(e)) begin
          failures++;
          $display("right unary q=%0d d=%0d: %0d vs %0d", nr, d, outr_cost[d], e);
        end
      end
      if (nr == N - 1) frames_done++;
      nr = (nr == N - 1) ? 0 : nr + 1;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < N; i++) begin
        fl[i] = FW'($urandom);
        fr[i] = (i % 3 == 0) ? fl[i] : FW'($urandom);
      end
      for (int i = 0; i < N; i++) begin
        @(negedge clk); slot = 1; in_valid = 1; in_feat_l = fl[i]; in_feat_r = fr[i];
        @(negedge clk); slot = 0; in_valid = 0;
        @(negedge clk);
      end
      while (frames_done == f) begin
        @(negedge clk); slot = 1;
        @(negedge clk); slot = 0;
        @(negedge clk);
      end
      checks++;
      if (nl != 0) begin failures++; $display("left count wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
