// tb_r3sgm_top: end-to-end test of r3sgm_top at a reduced size (64 x 24
// pixels, 16 disparities, 5 x 5 census) over two frames. See
// r3sgm_tb_common.svh for the stimulus and the checks.
module tb_r3sgm_top;
  localparam int W = 64, H = 24, ND = 16, CWIN = 5, D_BG = 3, D_BOX = 9, NFRAMES = 2;
  localparam bit STANDALONE = 1;

  r3sgm_top #(.WIDTH(W), .HEIGHT(H), .NUM_DISP(ND), .CENSUS_WIN(CWIN)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "r3sgm_tb_common.svh"
endmodule
