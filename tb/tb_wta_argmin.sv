// tb_wta_argmin: checks the minimum / arg-minimum tree against a linear scan,
// on random vectors, on vectors with many ties (lowest index must win) and on
// a size that is not a power of two.
module tb_wta_argmin;
  localparam int N = 12, W = 6, IW = 4;
  logic [N-1:0][W-1:0] vals;
  logic [W-1:0] min_val;
  logic [IW-1:0] min_idx;
  int checks = 0, failures = 0;

  wta_argmin #(.N(N), .W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, mi;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++)
        vals[i] = (t % 2 == 0) ? W'($urandom) : W'($urandom_range(0, 3));
      if (t == 5) vals = '1;   // all equal to the largest value: index 0
      #1;
      m = 1 << 30; mi = 0;
      for (int i = 0; i < N; i++) if (int'(vals[i]) < m) begin m = vals[i]; mi = i; end
      checks += 2;
      if (min_val != W'(m))   begin failures++; $display("min %0d vs %0d", min_val, m); end
      if (min_idx != IW'(mi)) begin failures++; $display("idx %0d vs %0d", min_idx, mi); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
