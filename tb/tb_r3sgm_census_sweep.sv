// tb_r3sgm_census_sweep: runs the pipeline at the KITTI frame size (1242 x 375,
// 128 disparities) with census windows of 3, 5, 7, 9 and 11 pixels, side by
// side, one frame each. The 13 x 13 default is covered by tb_r3sgm_full.
// Every run checks accuracy on a synthetic pair, the output count, the
// one-pixel-per-three-cycles rate (the same for every window width) and that
// every mechanism occurs.
module tb_r3sgm_census_sweep;
  localparam int NRUN = 5;
  logic done [NRUN];
  int   chk [NRUN];
  int   fail [NRUN];
  int   checks, failures;

  for (genvar i = 0; i < NRUN; i++) begin : g_run
    r3sgm_e2e_run #(.W(1242), .H(375), .ND(128), .CWIN(3 + 2 * i), .D_BG(20), .D_BOX(45)) u_run (
      .run_finished(done[i]), .run_checks(chk[i]), .run_failures(fail[i]));
  end

  function automatic int sum_of(input int v [NRUN]);
    int s = 0;
    for (int i = 0; i < NRUN; i++) s += v[i];
    return s;
  endfunction

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum_of(chk), sum_of(fail) + 1);
    $finish;
  end

  initial begin
    #100;  // let every run leave time zero with run_finished low
    wait (done[0] && done[1] && done[2] && done[3] && done[4]);
    checks   = sum_of(chk);
    failures = sum_of(fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
