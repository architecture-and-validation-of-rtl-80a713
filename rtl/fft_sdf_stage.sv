// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a serial (single-path delay
// feedback) FFT, used as the per-lane "biplex" part of fft_wideband.
// A block of 2*D samples passes through: the first D are parked in a D-deep delay memory while
// the previous block's rotated differences leave; for the second D, each sample b meets the
// parked sample a, a+b leaves at once and (a-b)*W_{2D}^j (j = position within the half block)
// is parked to leave during the next first half. Output order is the standard DIF order.
// Every stage grows the word by one bit (bit growth, no scaling). The twiddle product is rounded
// at TW_W-1 fraction bits and saturated, since a rotation can grow a component by sqrt(2).
// Interface: streaming, one complex sample per clock, sof marks sample 0 of a transform block.
// Timing: out_sof follows in_sof by D+1 clocks.
module fft_sdf_stage #(
  parameter int unsigned IN_W = 18,
  parameter int unsigned D    = 1024,
  parameter int unsigned TW_W = 18
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_sof,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    out_sof,
  output logic signed [IN_W:0]    out_re,
  output logic signed [IN_W:0]    out_im
);
  localparam int OW = IN_W + 1;
  localparam int CW = $clog2(2 * D);
  localparam int PW = (D > 1) ? $clog2(D) : 1;

  logic signed [OW-1:0]   buf_re [D];
  logic signed [OW-1:0]   buf_im [D];
  logic signed [TW_W-1:0] tw_c   [D];
  logic signed [TW_W-1:0] tw_s   [D];

  initial begin : gen_twiddles
    real pi, ang;
    int  qmax;
    pi   = 3.14159265358979323846;
    qmax = (1 << (TW_W - 1)) - 1;
    for (int j = 0; j < D; j++) begin
      ang     = -2.0 * pi * real'(j) / real'(2 * D);
      tw_c[j] = TW_W'($rtoi($floor($cos(ang) * real'(qmax) + 0.5)));
      tw_s[j] = TW_W'($rtoi($floor($sin(ang) * real'(qmax) + 0.5)));
    end
  end

  logic [CW-1:0] cnt, cur;
  logic          upper, armed;
  logic [PW-1:0] ptr;
  assign cur   = in_sof ? '0 : cnt + 1'b1;
  assign upper = cur[CW-1];
  if (D > 1) begin : g_ptr
    assign ptr = cur[PW-1:0];
  end else begin : g_ptr1
    assign ptr = 1'b0;
  end

  logic signed [OW-1:0] a_re, a_im, x_re, x_im, d_re, d_im;
  logic signed [OW-1:0] r_re, r_im;
  assign a_re = buf_re[ptr];
  assign a_im = buf_im[ptr];
  assign x_re = OW'(in_re);
  assign x_im = OW'(in_im);
  assign d_re = a_re - x_re;
  assign d_im = a_im - x_im;

  localparam int PRW = OW + TW_W + 1;
  localparam logic signed [PRW-1:0] RMAX = PRW'((1 << (OW - 1)) - 1);
  localparam logic signed [PRW-1:0] RMIN = -RMAX - 1;
  function automatic logic signed [OW-1:0] round_sat(input logic signed [PRW-1:0] v);
    logic signed [PRW-1:0] t;
    t = (v + PRW'(1 << (TW_W - 2))) >>> (TW_W - 1);
    return (t > RMAX) ? OW'(RMAX) : (t < RMIN) ? OW'(RMIN) : OW'(t);
  endfunction

  always_comb begin
    logic signed [PRW-1:0] pr, pi_;
    pr  = PRW'(d_re) * PRW'(tw_c[ptr]) - PRW'(d_im) * PRW'(tw_s[ptr]);
    pi_ = PRW'(d_re) * PRW'(tw_s[ptr]) + PRW'(d_im) * PRW'(tw_c[ptr]);
    r_re = round_sat(pr);
    r_im = round_sat(pi_);
  end

  always_ff @(posedge clk) begin
    if (!upper) begin
      buf_re[ptr] <= x_re;
      buf_im[ptr] <= x_im;
    end else begin
      buf_re[ptr] <= r_re;
      buf_im[ptr] <= r_im;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '1;
      armed   <= 1'b0;
      out_sof <= 1'b0;
      out_re  <= '0;
      out_im  <= '0;
    end else begin
      cnt <= cur;
      if (!upper) begin
        out_re <= a_re;
        out_im <= a_im;
      end else begin
        out_re <= a_re + x_re;
        out_im <= a_im + x_im;
      end
      out_sof <= armed && (cur == CW'(D));
      if (in_sof)                   armed <= 1'b1;
      else if (cur == CW'(D))       armed <= 1'b0;
    end
  end
endmodule
