// prober: per-channel tap that feeds the global capture engine (UCAP).
// It selects one of three points of the channelizer and packs it into a 128-bit word per clock:
//   PROBE_ADC    eight 14-bit time-stream samples, each sign-extended to 16 bits (lane 0 at LSB);
//   PROBE_FFT    two of the four (32+32i) bins of the word, {re,im} per bin, bin slots 0 and 2 in
//                even frames and slots 1 and 3 in odd frames, so two consecutive frames hold the
//                full FFT output at half the width;
//   PROBE_SCALER the four (4+4i) scaler bytes in bits 31:0.
// odd tells which half an FFT frame carries. src is meant to change between captures; the frame
// strobe of the selected stream is passed on as sof. Timing: one clock of latency.
// From the paper: the local tap (PROBER) and the full-FFT capture mode that interleaves odd and
// even bins over alternating frames. Which bins count as odd and even (bin slot within the clock
// word) and the word layouts are this design's choices.
module prober
  import chfpga_pkg::*;
#(
  parameter int unsigned LANES = SPC,
  parameter int unsigned ADC_WIDTH = ADC_W,
  parameter int unsigned FFT_W = FFT_OUT_W
) (
  input  logic                          clk,
  input  logic                          rst,
  input  probe_src_e                    src,
  input  logic                          adc_sof,
  input  logic signed [ADC_WIDTH-1:0]   adc [LANES],
  input  logic                          fft_sof,
  input  logic signed [FFT_W-1:0]       fft_re [LANES/2],
  input  logic signed [FFT_W-1:0]       fft_im [LANES/2],
  input  logic                          sc_sof,
  input  logic [7:0]                    sc_q [LANES/2],
  output logic [127:0]                  data,
  output logic                          sof,
  output logic                          odd
);
  logic fft_odd;
  always_ff @(posedge clk) begin
    if (rst) begin
      data    <= '0;
      sof     <= 1'b0;
      odd     <= 1'b0;
      fft_odd <= 1'b1;
    end else begin
      logic par;
      par = fft_sof ? ~fft_odd : fft_odd;
      if (fft_sof) fft_odd <= ~fft_odd;
      data <= '0;
      unique case (src)
        PROBE_FFT: begin
          for (int j = 0; j < 2; j++) begin
            data[j*64 +: 32]      <= fft_im[2*j + int'(par)];
            data[j*64 + 32 +: 32] <= fft_re[2*j + int'(par)];
          end
          sof <= fft_sof;
          odd <= par;
        end
        PROBE_SCALER: begin
          for (int b = 0; b < LANES / 2; b++) data[b*8 +: 8] <= sc_q[b];
          sof <= sc_sof;
          odd <= 1'b0;
        end
        default: begin
          for (int i = 0; i < LANES; i++) data[i*16 +: 16] <= 16'(adc[i]);
          sof <= adc_sof;
          odd <= 1'b0;
        end
      endcase
    end
  end
endmodule
