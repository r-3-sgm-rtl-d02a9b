// tb_frame_sequencer: checks the slot timing (one pixel per three cycles,
// phases one-hot and cyclic), that exactly NUM_PIXELS pixels are accepted per
// frame, that input is refused while draining and reopened by frame_done.
module tb_frame_sequencer;
  localparam int CPP = 3, NP = 10;
  logic clk = 0, rst_n = 0, src_valid = 0, frame_done = 0;
  logic src_ready, accept, draining;
  logic [CPP-1:0] slot_phase;
  int checks = 0, failures = 0, cyc = 0, last_acc = -100, nacc = 0, stalls = 0;

  frame_sequencer #(.CYCLES_PER_PIXEL(CPP), .NUM_PIXELS(NP)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    checks++;
    if (!$onehot(slot_phase)) begin failures++; $display("phase not one-hot"); end
    if (accept) begin
      checks += 2;
      if (cyc - last_acc < CPP) begin failures++; $display("accepts too close"); end
      if (!slot_phase[0]) begin failures++; $display("accept outside phase 0"); end
      last_acc = cyc;
      nacc++;
    end
    if (src_valid && !src_ready && draining) stalls++;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    src_valid = 1;
    for (int f = 0; f < 2; f++) begin
      wait (nacc == NP * (f + 1));
      @(negedge clk);
      checks++;
      if (!draining) begin failures++; $display("not draining after %0d pixels", NP); end
      repeat (20) @(negedge clk);
      checks++;
      if (nacc != NP * (f + 1)) begin failures++; $display("accepted while draining"); end
      frame_done = 1; @(negedge clk); frame_done = 0;
      repeat (CPP) @(negedge clk);
      checks++;
      if (draining) begin failures++; $display("frame_done did not reopen input"); end
    end
    wait (nacc == 2 * NP + 3);
    checks += 2;
    if (stalls == 0) failures++;
    if (nacc != 2 * NP + 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
