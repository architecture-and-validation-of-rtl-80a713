// tb_sync_seq: arms the sequencer, checks that nothing starts before the time pulse, that the
// start waits for the next 10 MHz reference edge after the pulse, that frame strobes then come
// every FRAME_WORDS clocks with incrementing frame numbers starting at frame_no_init, and that
// re-arming restarts the count on a new edge.
module tb_sync_seq;
  timeunit 1ns; timeprecision 100ps;
  localparam int FW = 16;
  logic clk = 0, rst = 1, arm = 0, pps = 0, ref10m = 0, sof, running, armed;
  logic [63:0] frame_no_init = 64'd1000, frame_no;
  int checks = 0, failures = 0, cyc = 0;
  sync_seq #(.FRAME_WORDS(FW)) dut (.*);
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  // 10 MHz reference: one period every 40 clocks of the 400 MHz clock
  always begin
    repeat (20) @(posedge clk);
    ref10m <= ~ref10m;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0d", what, cyc); end
  endtask
  int ref_rise_cyc;
  always @(posedge clk) if (ref10m && !dut.ref_q) ref_rise_cyc = cyc;
  initial begin
    int last_sof, n;
    logic [63:0] expect_no;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (5) @(posedge clk);
    for (int round = 0; round < 2; round++) begin
      arm <= 1;
      @(posedge clk);
      arm <= 0;
      repeat (50) @(posedge clk);
      #0.1;
      check(armed && !running && !sof, "armed and waiting for the pulse");
      // pulse, then the start must wait for a reference edge
      pps <= 1;
      @(posedge clk);
      pps <= 0;
      do begin @(posedge clk); #0.1; end while (!sof);
      check(running, "running at first strobe");
      check(frame_no == frame_no_init, $sformatf("frame number starts at init (%0d)", frame_no));
      check(cyc - ref_rise_cyc <= 3, $sformatf("start %0d clocks after reference edge", cyc - ref_rise_cyc));
      last_sof = cyc;
      expect_no = frame_no_init;
      n = 0;
      while (n < 5) begin
        @(posedge clk);
        #0.1;
        if (sof) begin
          expect_no++;
          check(cyc - last_sof == FW, "strobe period");
          check(frame_no == expect_no, "frame number increments");
          last_sof = cyc;
          n++;
        end
      end
      frame_no_init = 64'd77;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
