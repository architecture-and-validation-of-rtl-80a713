// tb_pfb_fir: feeds random 14-bit frames to a reduced PFB (8 lanes x 16 words, 4 taps) and
// compares every output sample from the fourth frame on with a 4-tap polyphase sum computed
// here from the Hamming-sinc window formula, quantized to 18 bits.
module tb_pfb_fir;
  timeunit 1ns; timeprecision 100ps;
  localparam int L = 8, FW = 16, TAPS = 4, M = L * FW, NF = 7;
  logic clk = 0, rst = 1, sof_in = 0, sof_out;
  logic signed [13:0] din [L];
  logic signed [17:0] dout [L];
  int checks = 0, failures = 0;
  pfb_fir #(.LANES(L), .FRAME_WORDS(FW), .TAPS(TAPS)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int x [NF][M];
  longint h [TAPS*M];
  initial begin
    real pi = 3.141592653589793, Lr, w, a, s;
    Lr = real'(TAPS * M);
    for (int m = 0; m < TAPS * M; m++) begin
      w = 0.54 - 0.46 * $cos(2.0 * pi * m / (Lr - 1.0));
      a = -2.0 + 4.0 * m / (Lr - 1.0);
      s = (a == 0.0) ? 1.0 : $sin(pi * a) / (pi * a);
      h[m] = longint'($floor(w * s * 131072.0 + 0.5));
      if (h[m] > 131071) h[m] = 131071;
    end
    for (int f = 0; f < NF; f++) for (int n = 0; n < M; n++) x[f][n] = $urandom_range(0, 16383) - 8192;
  end
  initial begin
    for (int i = 0; i < L; i++) din[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int f = 0; f < NF; f++)
      for (int t = 0; t < FW; t++) begin
        sof_in <= (t == 0);
        for (int i = 0; i < L; i++) din[i] <= 14'(x[f][t * L + i]);
        @(posedge clk);
      end
    sof_in <= 0;
  end
  initial begin
    int f, t;
    f = -1;
    t = 0;
    @(negedge rst);
    forever begin
      @(posedge clk);
      #0.1;
      if (sof_out) f++;
      if (sof_out) t = 0;
      if (f >= TAPS - 1 && t < FW) begin : cmp
        for (int i = 0; i < L; i++) begin
          longint acc, r;
          int n;
          n = t * L + i;
          acc = 0;
          for (int k = 0; k < TAPS; k++) acc += h[n + k * M] * longint'(x[f - TAPS + 1 + k][n]);
          r = (acc + 4096) >>> 13;
          if (r > 131071) r = 131071;
          if (r < -131072) r = -131072;
          checks++;
          if (longint'(dout[i]) != r) begin
            failures++;
            if (failures < 5) $display("frame %0d n %0d got %0d exp %0d", f, n, dout[i], r);
          end
        end
      end
      t++;
      if (f == NF - 1 && t == FW) break;
    end
    // every output sample of frames TAPS-1 .. NF-1 was compared
    checks++;
    if (checks != 1 + (NF - TAPS + 1) * M) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
