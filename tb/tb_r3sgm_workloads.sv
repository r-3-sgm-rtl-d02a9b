// tb_r3sgm_workloads: runs the pipeline at the published Middlebury and VGA
// configurations side by side, one frame each, with a 13 x 13 census:
//   384 x 288, 32 disparities  (Tsukuba)
//   450 x 375, 64 disparities  (Teddy, Cones)
//   640 x 480, 128 disparities (VGA)
// Each run checks accuracy on a synthetic pair, the output count, the
// one-pixel-per-three-cycles rate and that every mechanism occurs.
module tb_r3sgm_workloads;
  logic done [3];
  int   chk [3];
  int   fail [3];
  int   checks, failures;

  r3sgm_e2e_run #(.W(384), .H(288), .ND(32),  .CWIN(13), .D_BG(8),  .D_BOX(20)) u_tsukuba (
    .run_finished(done[0]), .run_checks(chk[0]), .run_failures(fail[0]));
  r3sgm_e2e_run #(.W(450), .H(375), .ND(64),  .CWIN(13), .D_BG(15), .D_BOX(40)) u_teddy (
    .run_finished(done[1]), .run_checks(chk[1]), .run_failures(fail[1]));
  r3sgm_e2e_run #(.W(640), .H(480), .ND(128), .CWIN(13), .D_BG(20), .D_BOX(45)) u_vga (
    .run_finished(done[2]), .run_checks(chk[2]), .run_failures(fail[2]));

  initial begin
    #30000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2], fail[0] + fail[1] + fail[2] + 1);
    $finish;
  end

  initial begin
    #100;  // let every run leave time zero with run_finished low
    wait (done[0] && done[1] && done[2]);
    checks   = chk[0] + chk[1] + chk[2];
    failures = fail[0] + fail[1] + fail[2];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
