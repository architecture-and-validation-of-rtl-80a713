// pfb_fir: critically sampled polyphase FIR front end of the channelizer (as CASPER pfb_fir_real).
// A frame of FRAME_LEN samples arrives as FRAME_WORDS words of LANES samples. For sample n of the
// current frame the output is  y[n] = sum_k h[n + k*FRAME_LEN] * x_{f-TAPS+1+k}[n],  k = 0..TAPS-1,
// i.e. the oldest frame meets the first segment of the window. The window is a Hamming-weighted
// sinc over TAPS*FRAME_LEN points, h[m] = (0.54 - 0.46 cos(2 pi m/(L-1))) * sinc(-TAPS/2 + TAPS*m/(L-1)),
// quantized to COEF_W bits with 1.0 = 2^(COEF_W-1) (clipped to the largest code). The ROM is
// filled at start-up from that formula. Past frames are held in a (TAPS-1)-frame delay memory.
// Output: sum >>> OUT_SHIFT, rounded and saturated to OUT_W bits.
// Interface: streaming, sof marks word 0 of a frame. Timing: two clocks of latency.
// From the paper: 4 taps, Hamming window, 18-bit coefficients, 14-bit in, 18-bit out. The sinc
// argument follows the usual CASPER convention; the output shift and rounding are this design's.
module pfb_fir
  import chfpga_pkg::*;
#(
  parameter int unsigned LANES       = SPC,
  parameter int unsigned IN_W        = ADC_W,
  parameter int unsigned OUT_W       = PFB_W,
  parameter int unsigned COEF_W      = 18,
  parameter int unsigned TAPS        = 4,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC,
  parameter int unsigned OUT_SHIFT   = 13
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        sof_in,
  input  logic signed [IN_W-1:0]      din  [LANES],
  output logic signed [OUT_W-1:0]     dout [LANES],
  output logic                        sof_out
);
  localparam int AW    = $clog2(FRAME_WORDS);
  localparam int ACC_W = IN_W + COEF_W + $clog2(TAPS) + 1;

  logic signed [COEF_W-1:0] coef  [TAPS][FRAME_WORDS][LANES];
  logic signed [IN_W-1:0]   hist  [TAPS-1][FRAME_WORDS][LANES];

  initial begin : gen_window
    real L, m, x, w, s, pi;
    int  q, qmax;
    pi   = 3.14159265358979323846;
    L    = real'(TAPS * FRAME_WORDS * LANES);
    qmax = (1 << (COEF_W - 1)) - 1;
    for (int k = 0; k < TAPS; k++)
      for (int a = 0; a < FRAME_WORDS; a++)
        for (int p = 0; p < LANES; p++) begin
          m = real'(k * FRAME_WORDS * LANES + a * LANES + p);
          w = 0.54 - 0.46 * $cos(2.0 * pi * m / (L - 1.0));
          x = -real'(TAPS) / 2.0 + real'(TAPS) * m / (L - 1.0);
          s = (x == 0.0) ? 1.0 : $sin(pi * x) / (pi * x);
          q = $rtoi($floor(w * s * real'(1 << (COEF_W - 1)) + 0.5));
          if (q > qmax) q = qmax;
          coef[k][a][p] = COEF_W'(q);
        end
  end

  logic [AW-1:0] widx, cur;
  assign cur = sof_in ? '0 : widx + 1'b1;

  logic signed [ACC_W-1:0] acc [LANES];
  logic                    sof1;

  always_ff @(posedge clk) begin
    if (rst) begin
      widx <= '1;
      sof1 <= 1'b0;
      for (int p = 0; p < LANES; p++) acc[p] <= '0;
    end else begin
      widx <= cur;
      sof1 <= sof_in;
      for (int p = 0; p < LANES; p++) begin
        logic signed [ACC_W-1:0] s;
        s = ACC_W'(din[p]) * ACC_W'(coef[TAPS-1][cur][p]);
        for (int k = 0; k < TAPS - 1; k++)
          s += ACC_W'(hist[TAPS-2-k][cur][p]) * ACC_W'(coef[k][cur][p]);
        acc[p] <= s;
      end
    end
  end

  // frame history: hist[0] is one frame ago, hist[TAPS-2] is TAPS-1 frames ago
  always_ff @(posedge clk) begin
    for (int p = 0; p < LANES; p++) begin
      hist[0][cur][p] <= din[p];
      for (int k = 1; k < TAPS - 1; k++) hist[k][cur][p] <= hist[k-1][cur][p];
    end
  end

  localparam logic signed [ACC_W-1:0] OMAX = ACC_W'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] OMIN = -OMAX - 1;
  always_ff @(posedge clk) begin
    if (rst) begin
      sof_out <= 1'b0;
      for (int p = 0; p < LANES; p++) dout[p] <= '0;
    end else begin
      sof_out <= sof1;
      for (int p = 0; p < LANES; p++) begin
        logic signed [ACC_W-1:0] r;
        r = (acc[p] + ACC_W'(1 << (OUT_SHIFT - 1))) >>> OUT_SHIFT;
        dout[p] <= (r > OMAX) ? OUT_W'(OMAX) : (r < OMIN) ? OUT_W'(OMIN) : OUT_W'(r);
      end
    end
  end
endmodule
