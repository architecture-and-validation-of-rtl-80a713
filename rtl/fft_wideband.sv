// fft_wideband: real-input wideband FFT of LANES*FRAME_WORDS samples (16384) at LANES (8) samples
// per clock, returning the LANES/2 (4) positive-frequency bins per clock.
// With n = p + LANES*t (p = lane, t = time) and k = k1 + FRAME_WORDS*k2 the transform splits as
//   X[k] = sum_p W_8^(p*k2) * [ W_N^(p*k1) * FFT_2048{ x[p + 8t] }(k1) ]
// so each lane first runs a serial 2048-point radix-2 DIF FFT (11 fft_sdf_stage stages, the
// "biplex" part), is then rotated by W_N^(p*k1), and the lanes are combined by a direct 8-point
// DFT (the 3 "direct" stages), of which only k2 = 0..LANES/2-1 are computed because the input
// is real. Output word u carries bins k1 + 2048*k2 with k1 = bit-reverse(u): the natural DIF
// order, not reordered. Words grow one bit per stage: 18-bit in, 29 bits after the lane FFTs,
// 32 bits out. Twiddles are TW_W-bit (18+18i), rounded products, saturated.
// Interface: streaming, sof marks the first word; out_sof marks output word u = 0.
// Timing: latency FRAME_WORDS - 1 + NS + 2 clocks (2060 at the defaults).
// From the paper: 16384-point real FFT, DIF, 11 biplex + 3 direct stages, 18-bit twiddles,
// bit growth 18 -> 32, 4 bins per clock, no bin reordering. CASPER's trick of packing two real
// lanes into one complex biplex FFT is not used: every lane runs its own complex FFT (a
// deliberate simplification that costs resources, not accuracy).
module fft_wideband
  import chfpga_pkg::*;
#(
  parameter int unsigned LANES       = SPC,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC,
  parameter int unsigned IN_W        = PFB_W,
  parameter int unsigned TW_W        = 18
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       sof_in,
  input  logic signed [IN_W-1:0]     din [LANES],
  output logic                       sof_out,
  output logic signed [IN_W+$clog2(FRAME_WORDS)+$clog2(LANES)-1:0] out_re [LANES/2],
  output logic signed [IN_W+$clog2(FRAME_WORDS)+$clog2(LANES)-1:0] out_im [LANES/2]
);
  localparam int NS    = $clog2(FRAME_WORDS);
  localparam int LB    = $clog2(LANES);
  localparam int YW    = IN_W + NS;
  localparam int OW    = YW + LB;
  localparam int NB    = LANES / 2;
  localparam int PRW   = YW + TW_W + 1;
  localparam int QMAX  = (1 << (TW_W - 1)) - 1;

  // ---------------- per-lane serial DIF FFTs ----------------
  logic signed [YW-1:0] st_re [LANES][NS+1];
  logic signed [YW-1:0] st_im [LANES][NS+1];
  logic                 st_sof [LANES][NS+1];

  for (genvar p = 0; p < LANES; p++) begin : g_lane
    assign st_re[p][0]  = YW'(din[p]);
    assign st_im[p][0]  = '0;
    assign st_sof[p][0] = sof_in;
    for (genvar s = 0; s < NS; s++) begin : g_stage
      logic signed [IN_W+s:0] o_re, o_im;
      fft_sdf_stage #(.IN_W(IN_W + s), .D(FRAME_WORDS >> (s + 1)), .TW_W(TW_W)) u_stage (
        .clk, .rst,
        .in_sof (st_sof[p][s]),
        .in_re  (st_re[p][s][IN_W+s-1:0]),
        .in_im  (st_im[p][s][IN_W+s-1:0]),
        .out_sof(st_sof[p][s+1]),
        .out_re (o_re),
        .out_im (o_im)
      );
      assign st_re[p][s+1] = YW'(o_re);
      assign st_im[p][s+1] = YW'(o_im);
    end
  end

  // ---------------- inter-lane twiddles W_N^(p*k1) ----------------
  logic signed [TW_W-1:0] tw_c [LANES][FRAME_WORDS];
  logic signed [TW_W-1:0] tw_s [LANES][FRAME_WORDS];
  logic signed [TW_W-1:0] w8_c [LANES][NB];
  logic signed [TW_W-1:0] w8_s [LANES][NB];

  function automatic int unsigned bitrev(input int unsigned v, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int i = 0; i < bits; i++) r |= ((v >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  initial begin : gen_twiddles
    real pi, ang;
    pi = 3.14159265358979323846;
    for (int p = 0; p < LANES; p++) begin
      for (int u = 0; u < FRAME_WORDS; u++) begin
        ang = -2.0 * pi * real'(p * bitrev(u, NS)) / real'(LANES * FRAME_WORDS);
        tw_c[p][u] = TW_W'($rtoi($floor($cos(ang) * real'(QMAX) + 0.5)));
        tw_s[p][u] = TW_W'($rtoi($floor($sin(ang) * real'(QMAX) + 0.5)));
      end
      for (int k = 0; k < NB; k++) begin
        ang = -2.0 * pi * real'((p * k) % LANES) / real'(LANES);
        w8_c[p][k] = TW_W'($rtoi($floor($cos(ang) * real'(QMAX) + 0.5)));
        w8_s[p][k] = TW_W'($rtoi($floor($sin(ang) * real'(QMAX) + 0.5)));
      end
    end
  end

  localparam logic signed [PRW-1:0] RMAX = PRW'((1 << (YW - 1)) - 1);
  localparam logic signed [PRW-1:0] RMIN = -RMAX - 1;
  function automatic logic signed [YW-1:0] round_sat(input logic signed [PRW-1:0] v);
    logic signed [PRW-1:0] t;
    t = (v + PRW'(1 << (TW_W - 2))) >>> (TW_W - 1);
    return (t > RMAX) ? YW'(RMAX) : (t < RMIN) ? YW'(RMIN) : YW'(t);
  endfunction

  logic [NS-1:0]        ucnt, ucur;
  logic                 sof_a, sof_b;
  logic signed [YW-1:0] y_re [LANES];
  logic signed [YW-1:0] y_im [LANES];
  assign ucur = st_sof[0][NS] ? '0 : ucnt + 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      ucnt  <= '1;
      sof_a <= 1'b0;
      for (int p = 0; p < LANES; p++) begin
        y_re[p] <= '0;
        y_im[p] <= '0;
      end
    end else begin
      ucnt  <= ucur;
      sof_a <= st_sof[0][NS];
      for (int p = 0; p < LANES; p++) begin
        y_re[p] <= round_sat(PRW'(st_re[p][NS]) * PRW'(tw_c[p][ucur]) - PRW'(st_im[p][NS]) * PRW'(tw_s[p][ucur]));
        y_im[p] <= round_sat(PRW'(st_re[p][NS]) * PRW'(tw_s[p][ucur]) + PRW'(st_im[p][NS]) * PRW'(tw_c[p][ucur]));
      end
    end
  end

  // ---------------- direct DFT across lanes, k2 = 0..NB-1 ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      sof_b <= 1'b0;
      for (int k = 0; k < NB; k++) begin
        out_re[k] <= '0;
        out_im[k] <= '0;
      end
    end else begin
      sof_b <= sof_a;
      for (int k = 0; k < NB; k++) begin
        logic signed [OW-1:0] sr, si;
        sr = '0;
        si = '0;
        for (int p = 0; p < LANES; p++) begin
          sr += OW'(round_sat(PRW'(y_re[p]) * PRW'(w8_c[p][k]) - PRW'(y_im[p]) * PRW'(w8_s[p][k])));
          si += OW'(round_sat(PRW'(y_re[p]) * PRW'(w8_s[p][k]) + PRW'(y_im[p]) * PRW'(w8_c[p][k])));
        end
        out_re[k] <= sr;
        out_im[k] <= si;
      end
    end
  end
  assign sof_out = sof_b;
endmodule
