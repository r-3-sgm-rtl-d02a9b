// tb_r3sgm_full: end-to-end test of r3sgm_top with every parameter at its
// default: one KITTI-sized frame of 1242 x 375 pixels, 128 disparities and a
// 13 x 13 census window. See r3sgm_tb_common.svh for stimulus and checks.
module tb_r3sgm_full;
  localparam int W = r3sgm_pkg::IMG_WIDTH, H = r3sgm_pkg::IMG_HEIGHT;
  localparam int ND = r3sgm_pkg::NUM_DISP, CWIN = r3sgm_pkg::CENSUS_WIN;
  localparam int D_BG = 20, D_BOX = 45, NFRAMES = 1;
  localparam bit STANDALONE = 1;

  r3sgm_top dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "r3sgm_tb_common.svh"
endmodule
