// r3sgm_e2e_run: one end-to-end run of r3sgm_top at a given frame size,
// disparity range and census window, with the stimulus and checks of
// r3sgm_tb_common.svh. Raises run_done when its frames are finished and
// reports its check and failure counts; used by tb_r3sgm_workloads to run
// several published configurations side by side.
module r3sgm_e2e_run #(
  parameter int W = 64, parameter int H = 24, parameter int ND = 16, parameter int CWIN = 5,
  parameter int D_BG = 3, parameter int D_BOX = 9
) (
  output logic run_finished,
  output int   run_checks,
  output int   run_failures
);
  localparam int NFRAMES = 1;
  localparam bit STANDALONE = 0;

  r3sgm_top #(.WIDTH(W), .HEIGHT(H), .NUM_DISP(ND), .CENSUS_WIN(CWIN)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_left, .in_right, .out_valid, .out_last,
    .out_disp, .out_ok, .outr_valid, .outr_disp, .draining
  );

  `include "r3sgm_tb_common.svh"

  assign run_finished = run_done;
  assign run_checks   = checks;
  assign run_failures = failures;
endmodule
