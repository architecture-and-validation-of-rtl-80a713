// tb_fft_wideband: self-checking test of the wideband real FFT.
// Drives frames of random 18-bit samples (and one single-tone frame) into a reduced 512-point
// instance (8 lanes x 64 words), computes each bin with a direct DFT in floating point and
// compares every output bin (DIF order: word u holds bins bitrev(u) + 64*k2). Also checks the
// latency from input to output frame strobe, FRAME_WORDS - 1 + stages + 2 clocks.
module tb_fft_wideband;
  timeunit 1ns; timeprecision 100ps;
  localparam int LANES = 8, FW = 64, IN_W = 18;
  localparam int NS = $clog2(FW), N = LANES * FW, OW = IN_W + NS + 3;
  localparam int NFRAMES = 4;
  logic clk = 0, rst = 1, sof_in = 0, sof_out;
  logic signed [IN_W-1:0] din [LANES];
  logic signed [OW-1:0] out_re [LANES/2], out_im [LANES/2];
  int checks = 0, failures = 0;
  real xs [NFRAMES][N];

  fft_wideband #(.LANES(LANES), .FRAME_WORDS(FW), .IN_W(IN_W)) dut (.*);
  always #1 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bitrev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) r |= ((v >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  int in_sof_cycle = -1, out_sof_cycle = -1, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : drive
    for (int f = 0; f < NFRAMES; f++)
      for (int n = 0; n < N; n++)
        if (f == 1) xs[f][n] = $floor(30000.0 * $cos(2.0 * 3.141592653589793 * 37.0 * n / N));
        else        xs[f][n] = real'($signed($urandom_range(0, 2 ** 15 - 1)) - 2 ** 14);
    for (int p = 0; p < LANES; p++) din[p] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int f = 0; f < NFRAMES; f++)
      for (int t = 0; t < FW; t++) begin
        sof_in <= (t == 0);
        if (f == 0 && t == 0) in_sof_cycle = cyc;
        for (int p = 0; p < LANES; p++) din[p] <= IN_W'($rtoi(xs[f][t * LANES + p]));
        @(posedge clk);
      end
    sof_in <= 0;
    for (int p = 0; p < LANES; p++) din[p] <= '0;
  end

  initial begin : check
    real pi = 3.141592653589793;
    @(negedge rst);
    do begin
      @(posedge clk);
      #0.1;
    end while (!sof_out);
    out_sof_cycle = cyc - 1;
    checks++;
    if (out_sof_cycle - in_sof_cycle != FW - 1 + NS + 2) begin
      failures++;
      $display("latency %0d, expected %0d", out_sof_cycle - in_sof_cycle, FW - 1 + NS + 2);
    end
    for (int f = 0; f < NFRAMES; f++) begin
      for (int u = 0; u < FW; u++) begin
        if (u != 0) begin
          @(posedge clk);
          #0.1;
        end
        for (int k2 = 0; k2 < LANES / 2; k2++) begin
          int k;
          real rr, ri, er, ei, tol;
          k = bitrev(u, NS) + FW * k2;
          rr = 0; ri = 0;
          for (int n = 0; n < N; n++) begin
            rr += xs[f][n] * $cos(2.0 * pi * k * n / N);
            ri -= xs[f][n] * $sin(2.0 * pi * k * n / N);
          end
          er = real'(out_re[k2]) - rr;
          ei = real'(out_im[k2]) - ri;
          tol = 64.0 + 1.0e-4 * ($sqrt(rr * rr + ri * ri));
          checks++;
          if (er > tol || er < -tol || ei > tol || ei < -tol) begin
            failures++;
            if (failures < 10) $display("frame %0d bin %0d: got (%0d,%0d) ref (%f,%f)", f, k, out_re[k2], out_im[k2], rr, ri);
          end
        end
      end
      @(posedge clk);
      #0.1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
