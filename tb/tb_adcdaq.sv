// tb_adcdaq: checks the acquisition register stage, the per-frame over-range count and the
// sticky flag with its clear, against counts kept by the testbench.
module tb_adcdaq;
  timeunit 1ns; timeprecision 100ps;
  localparam int L = 8, W = 14, FW = 16;
  logic clk = 0, rst = 1, sof_in = 0, adc_ovr = 0, ovf_clear = 0, sof_out, ovf_sticky;
  logic signed [W-1:0] adc_data [L], data_out [L];
  logic [15:0] ovf_frame_count;
  int checks = 0, failures = 0;
  adcdaq #(.LANES(L), .W(W)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask
  initial begin
    logic signed [W-1:0] prev [L];
    int cnt, nfs;
    for (int i = 0; i < L; i++) adc_data[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    cnt = 0;
    for (int f = 0; f < 6; f++) begin
      for (int t = 0; t < FW; t++) begin
        sof_in <= (t == 0);
        nfs = 0;
        for (int i = 0; i < L; i++) begin
          int r;
          r = $urandom_range(0, 99);
          adc_data[i] <= (f == 4) ? W'(0) : (r < 3) ? 14'sh1FFF : (r < 6) ? 14'sh2000 : W'($urandom_range(0, 16000) - 8000);
        end
        @(posedge clk);
        for (int i = 0; i < L; i++) prev[i] = adc_data[i];
        #0.1;
        for (int i = 0; i < L; i++) check(data_out[i] == prev[i], $sformatf("data %0d %0d t=%0d", data_out[i], prev[i], t));
        check(sof_out == (t == 0), "sof");
        if (t == 0 && f > 0) check(ovf_frame_count == 16'(cnt), $sformatf("count %0d vs %0d", ovf_frame_count, cnt));
        if (t == 0) cnt = 0;
        for (int i = 0; i < L; i++) if (prev[i] == 14'sh1FFF || prev[i] == 14'sh2000) cnt++;
      end
      if (f == 3) begin
        check(ovf_sticky == 1'b1, "sticky set");
        ovf_clear <= 1;
      end
      if (f == 4) begin
        ovf_clear <= 0;
      end
    end
    // frame 4 was all zeros with clear during it: flag must be clear after it
    check(ovf_sticky == 1'b1, "sticky set again in frame 5");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
