// tb_cost_aggregator: checks cost_aggregator against a reference model of the
// four-neighbour recursion
//   L(p,d) = C(p,d) + floor( sum_x (min{L(p-x,d), L(p-x,d+-1)+P1, minL(p-x)+P2} - minL(p-x)) / 4 )
// with absent neighbours contributing zero. Random unaries for two frames are
// fed at the full rate of one pixel per three cycles; the cost vector, its
// minimum, the WTA disparity (lowest index on ties) and the 3-cycle latency of
// every pixel are checked.
module tb_cost_aggregator;
  localparam int W = 7, H = 4, ND = 8, UMAX = 24, P1 = 3, P2 = 9;
  localparam int UW = 5, CWID = 6, DW = 3;
  localparam int N = W * H;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [ND-1:0][UW-1:0] in_cost = '0;
  logic in_ready, out_valid;
  logic [DW-1:0] out_disp;
  logic [CWID-1:0] out_min;
  logic [ND-1:0][CWID-1:0] out_cost;
  int checks = 0, failures = 0;
  int C [N][ND];
  int L [N][ND];
  int Lmin [N];
  int Larg [N];
  int nout = 0, cyc = 0;
  int in_stamp [$];

  cost_aggregator #(.WIDTH(W), .HEIGHT(H), .NUM_DISP(ND), .UNARY_MAX(UMAX), .P1(P1), .P2(P2)) dut (.*);

  always #5 clk = ~clk;


  function automatic int term(int q, int d, bit present);
    int m;
    if (!present) return 0;
    m = L[q][d];
    if (d > 0 && L[q][d-1] + P1 < m) m = L[q][d-1] + P1;
    if (d < ND - 1 && L[q][d+1] + P1 < m) m = L[q][d+1] + P1;
    if (Lmin[q] + P2 < m) m = Lmin[q] + P2;
    return m - Lmin[q];
  endfunction

  task automatic reference();
    int x, y, s;
    for (int p = 0; p < N; p++) begin
      x = p % W; y = p / W;
      Lmin[p] = 1 << 30; Larg[p] = 0;
      for (int d = 0; d < ND; d++) begin
        s = term(p - 1, d, x > 0) + term(p - W - 1, d, x > 0 && y > 0) +
            term(p - W, d, y > 0) + term(p - W + 1, d, y > 0 && x < W - 1);
        L[p][d] = C[p][d] + s / 4;
        if (L[p][d] < Lmin[p]) begin Lmin[p] = L[p][d]; Larg[p] = d; end
      end
    end
  endtask

  // Checker; the input cycle stamps are taken after the check in the same block.
  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) check_output();
    if (in_valid) in_stamp.push_back(cyc);
  end

  task automatic check_output();
    for (int d = 0; d < ND; d++) begin
      checks++;
      if (out_cost[d] != CWID'(L[nout][d])) begin
        failures++;
        $display("L mismatch p=%0d d=%0d: %0d vs %0d", nout, d, out_cost[d], L[nout][d]);
      end
    end
    checks += 3;
    if (out_min != CWID'(Lmin[nout])) begin failures++; $display("min mismatch p=%0d", nout); end
    if (out_disp != DW'(Larg[nout])) begin failures++; $display("disp mismatch p=%0d: %0d vs %0d", nout, out_disp, Larg[nout]); end
    if (in_stamp.size() == 0 || cyc - in_stamp.pop_front() != 3) begin failures++; $display("latency wrong at p=%0d", nout); end
    nout = (nout == N - 1) ? 0 : nout + 1;
  endtask

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
      for (int p = 0; p < N; p++)
        for (int d = 0; d < ND; d++)
          C[p][d] = (f == 0) ? $urandom_range(0, UMAX) : ((d == 3 + (p % 3)) ? $urandom_range(0, 4) : $urandom_range(10, UMAX));
      reference();
      for (int p = 0; p < N; p++) begin
        @(negedge clk);
        checks++;
        if (!in_ready) begin failures++; $display("not ready at p=%0d", p); end
        in_valid = 1;
        for (int d = 0; d < ND; d++) in_cost[d] = UW'(C[p][d]);
        @(negedge clk); in_valid = 0;
        @(negedge clk);
      end
      repeat (6) @(negedge clk);
    end
    checks++;
    if (nout != 0) begin failures++; $display("output count wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
