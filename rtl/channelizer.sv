// channelizer: one CHAN of the F-engine, turning one ADC stream into (4+4i) frequency bins.
// Chain: funcgen -> pfb_fir -> fft_wideband -> scaler, with scaler_stats counting clipped bins
// and prober offering a selectable tap to the global capture engine. With cfg.fft_bypass set the
// PFB/FFT is skipped and the function generator's words are read as spectra: samples 2b and 2b+1
// of a word become the real and imaginary parts of bin slot b, sign-extended to 32 bits. This
// lets a programmed spectrum reach the scaler and everything after it.
// Interface: LANES samples per clock in, BINS (4) bytes per clock out, each with a frame strobe.
// Output word u of a frame holds bins bitrev(u) + FRAME_WORDS*k2, k2 = 0..3 (DIF order).
// q_frame_no is the number of the input frame whose PFB/FFT output starts at q_sof (valid with q_sof).
// Timing: funcgen 2 + PFB 2 + FFT (FRAME_WORDS + log2(FRAME_WORDS) + 1) + scaler 2 clocks.
// The chain and its stages are the paper's; the bypass word format is this design's choice.
module channelizer
  import chfpga_pkg::*;
#(
  parameter int unsigned LANES       = SPC,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC,
  parameter int unsigned QUANT_LSB   = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     sof_in,
  input  logic signed [ADC_W-1:0]  din [LANES],
  input  logic [63:0]              frame_no,
  input  chan_cfg_t                cfg,
  input  logic                     seed_load,
  input  logic                     wave_we,
  input  logic [$clog2(FRAME_WORDS)-1:0] wave_addr,
  input  logic [LANES*ADC_W-1:0]   wave_data,
  input  logic                     gain_we,
  input  logic                     gain_wbank,
  input  logic [$clog2(FRAME_WORDS)-1:0] gain_waddr,
  input  logic [LANES/2*GAIN_W-1:0] gain_wdata,
  input  logic                     stats_single_bin,
  input  logic [$clog2(FRAME_WORDS*LANES/2)-1:0] stats_bin,
  input  logic [15:0]              stats_period,
  output logic                     q_sof,
  output logic [63:0]              q_frame_no,   // number of the input frame now leaving
  output logic [7:0]               q [LANES/2],
  output logic [127:0]             probe_data,
  output logic                     probe_sof,
  output logic                     probe_odd,
  output logic [15:0]              fg_ovf_count,
  output logic [31:0]              stats_count,
  output logic                     stats_done
);
  localparam int NB = LANES / 2;
  localparam int FW = PFB_W + $clog2(FRAME_WORDS) + $clog2(LANES);

  logic signed [ADC_W-1:0] fg_out [LANES];
  logic                    fg_sof;
  funcgen #(.LANES(LANES), .W(ADC_W), .FRAME_WORDS(FRAME_WORDS)) u_fg (
    .clk, .rst, .sof_in, .din, .frame_no,
    .mode(cfg.fg_mode), .gain(cfg.fg_gain), .clip(cfg.fg_clip), .seed(cfg.fg_seed),
    .seed_load, .ovf_lanes(cfg.fg_ovf_lanes),
    .wave_we, .wave_addr, .wave_data,
    .dout(fg_out), .sof_out(fg_sof), .ovf_frame_count(fg_ovf_count)
  );

  logic signed [PFB_W-1:0] pfb_out [LANES];
  logic                    pfb_sof;
  pfb_fir #(.LANES(LANES), .IN_W(ADC_W), .OUT_W(PFB_W), .FRAME_WORDS(FRAME_WORDS)) u_pfb (
    .clk, .rst, .sof_in(fg_sof), .din(fg_out), .dout(pfb_out), .sof_out(pfb_sof)
  );

  logic signed [FW-1:0] fft_re [NB];
  logic signed [FW-1:0] fft_im [NB];
  logic                 fft_sof;
  fft_wideband #(.LANES(LANES), .FRAME_WORDS(FRAME_WORDS), .IN_W(PFB_W)) u_fft (
    .clk, .rst, .sof_in(pfb_sof), .din(pfb_out), .sof_out(fft_sof), .out_re(fft_re), .out_im(fft_im)
  );

  // scaler input: FFT output or bypassed function generator words
  logic signed [FFT_OUT_W-1:0] sc_re [NB];
  logic signed [FFT_OUT_W-1:0] sc_im [NB];
  logic                        sc_in_sof;
  always_comb begin
    sc_in_sof = cfg.fft_bypass ? fg_sof : fft_sof;
    for (int b = 0; b < NB; b++) begin
      sc_re[b] = cfg.fft_bypass ? FFT_OUT_W'(fg_out[2*b])     : FFT_OUT_W'(fft_re[b]);
      sc_im[b] = cfg.fft_bypass ? FFT_OUT_W'(fg_out[2*b + 1]) : FFT_OUT_W'(fft_im[b]);
    end
  end

  logic [NB-1:0] sc_ovf;
  logic signed [FFT_OUT_W+GAIN_W-1:0] prod_re [NB];
  logic signed [FFT_OUT_W+GAIN_W-1:0] prod_im [NB];
  scaler #(.BINS(NB), .IN_W(FFT_OUT_W), .GW(GAIN_W), .FRAME_WORDS(FRAME_WORDS), .QUANT_LSB(QUANT_LSB)) u_scaler (
    .clk, .rst, .sof_in(sc_in_sof), .in_re(sc_re), .in_im(sc_im), .bank_sel(cfg.gain_bank),
    .gain_we, .gain_wbank, .gain_waddr, .gain_wdata,
    .sof_out(q_sof), .q, .ovf(sc_ovf), .prod_re, .prod_im
  );

  scaler_stats #(.BINS(NB), .FRAME_WORDS(FRAME_WORDS)) u_stats (
    .clk, .rst, .sof_in(q_sof), .ovf(sc_ovf), .single_bin(stats_single_bin), .bin_sel(stats_bin),
    .period_frames(stats_period), .count(stats_count), .done(stats_done)
  );

  // frame numbers travel beside the pipeline, latched at each stage's frame strobe. The FFT
  // holds a frame for between one and two frame times, so two numbers are kept across it.
  logic [63:0] fno_fg_in, fno_pfb_in, fno_fft_in, fno_fft_prev, fno_sc_in;
  always_ff @(posedge clk) begin
    if (rst) begin
      fno_fg_in    <= '0;
      fno_pfb_in   <= '0;
      fno_fft_in   <= '0;
      fno_fft_prev <= '0;
      fno_sc_in    <= '0;
    end else begin
      if (sof_in) fno_fg_in <= frame_no;
      if (fg_sof) fno_pfb_in <= fno_fg_in;
      if (pfb_sof) begin
        fno_fft_in   <= fno_pfb_in;
        fno_fft_prev <= fno_fft_in;
      end
      if (sc_in_sof) fno_sc_in <= cfg.fft_bypass ? fno_fg_in : fno_fft_prev;
    end
  end
  // the scaler holds a frame for two clocks only, so the number latched at its input still holds
  assign q_frame_no = fno_sc_in;

  prober #(.LANES(LANES), .ADC_WIDTH(ADC_W), .FFT_W(FFT_OUT_W)) u_probe (
    .clk, .rst, .src(cfg.probe_src),
    .adc_sof(fg_sof), .adc(fg_out),
    .fft_sof(sc_in_sof), .fft_re(sc_re), .fft_im(sc_im),
    .sc_sof(q_sof), .sc_q(q),
    .data(probe_data), .sof(probe_sof), .odd(probe_odd)
  );
endmodule
