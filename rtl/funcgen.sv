// funcgen: the channelizer's function generator.
// In pass-through mode the ADC samples go on unchanged while the block counts full-scale samples
// per frame. Other modes scale and clip the data, replay a programmed one-frame waveform
// (2048 words of eight 14-bit samples, repeated every frame), emit pseudorandom noise from a
// user seed, force chosen lanes to full scale to simulate overflows, or fill the frame with
// the sample number or the frame number (to trace data routing downstream).
// The waveform memory also carries user spectra when the FFT is bypassed downstream.
// Interface: streaming, one word of LANES samples per clock, sof marks the first word of a frame.
// Timing: two clocks of latency for data and sof.
// The list of modes follows the paper; gain format (unsigned 4.12), PRN generator (one 32-bit
// xorshift per lane) and the exact sample/frame number encodings are this design's choices.
module funcgen
  import chfpga_pkg::*;
#(
  parameter int unsigned LANES      = SPC,
  parameter int unsigned W          = ADC_W,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     sof_in,
  input  logic signed [W-1:0]      din [LANES],
  input  logic [63:0]              frame_no,
  input  fg_mode_e                 mode,
  input  logic [15:0]              gain,
  input  logic [W-1:0]             clip,
  input  logic [31:0]              seed,
  input  logic                     seed_load,
  input  logic [LANES-1:0]         ovf_lanes,
  // waveform memory write port
  input  logic                     wave_we,
  input  logic [$clog2(FRAME_WORDS)-1:0] wave_addr,
  input  logic [LANES*W-1:0]       wave_data,
  output logic signed [W-1:0]      dout [LANES],
  output logic                     sof_out,
  output logic [15:0]              ovf_frame_count
);
  localparam int AW = $clog2(FRAME_WORDS);
  localparam logic signed [W-1:0] FS_POS = {1'b0, {(W-1){1'b1}}};
  localparam logic signed [W-1:0] FS_NEG = {1'b1, {(W-1){1'b0}}};

  logic [LANES*W-1:0] wave_mem [FRAME_WORDS];
  logic [AW-1:0]      widx;        // word index within the frame
  logic [31:0]        prn [LANES];
  logic signed [W-1:0] s1 [LANES];
  logic               sof1;
  logic [15:0]        acc;

  always_ff @(posedge clk) if (wave_we) wave_mem[wave_addr] <= wave_data;

  function automatic logic [31:0] xorshift(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  // word index: 0 on sof, counting otherwise
  logic [AW-1:0] cur_idx;
  assign cur_idx = sof_in ? '0 : widx + 1'b1;

  always_ff @(posedge clk) begin
    if (rst) widx <= '1;
    else     widx <= cur_idx;
  end

  // stage 1: choose the source
  logic signed [W-1:0] src [LANES];
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      unique case (mode)
        FG_WAVEFORM:  src[i] = wave_mem[cur_idx][i*W +: W];
        FG_PRN:       src[i] = prn[i][W-1:0];
        FG_OVF:       src[i] = ovf_lanes[i] ? FS_POS : din[i];
        FG_SAMPLE_NO: src[i] = W'(cur_idx * LANES + i);
        FG_FRAME_NO:  src[i] = W'(frame_no);
        default:      src[i] = din[i];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sof1 <= 1'b0;
      for (int i = 0; i < LANES; i++) begin
        s1[i]  <= '0;
        prn[i] <= 32'h1;
      end
    end else begin
      sof1 <= sof_in;
      for (int i = 0; i < LANES; i++) begin
        if (seed_load) prn[i] <= (seed ^ (32'h9E3779B9 * (i + 1))) | 32'h1;
        else           prn[i] <= xorshift(prn[i]);
        s1[i] <= src[i];
      end
    end
  end

  // stage 2: optional scale and clip, overflow statistics
  logic signed [W+17:0] prod [LANES];
  logic signed [W-1:0]  s2 [LANES];
  logic [$clog2(LANES+1)-1:0] n_ovf;
  always_comb begin
    n_ovf = '0;
    for (int i = 0; i < LANES; i++) begin
      prod[i] = (W+18)'(s1[i]) * $signed({2'b00, gain});
      prod[i] = prod[i] >>> 12;
      if (mode == FG_SCALE) begin
        if (prod[i] > $signed((W+18)'(clip)))       s2[i] = $signed(clip);
        else if (prod[i] < -$signed((W+18)'(clip))) s2[i] = -$signed(clip);
        else                                        s2[i] = W'(prod[i]);
      end else begin
        s2[i] = s1[i];
      end
      if (s2[i] == FS_POS || s2[i] == FS_NEG) n_ovf = n_ovf + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sof_out <= 1'b0;
      acc <= '0;
      ovf_frame_count <= '0;
      for (int i = 0; i < LANES; i++) dout[i] <= '0;
    end else begin
      sof_out <= sof1;
      for (int i = 0; i < LANES; i++) dout[i] <= s2[i];
      if (sof1) begin
        ovf_frame_count <= acc;
        acc <= 16'(n_ovf);
      end else if (acc <= 16'hFFFF - 16'(LANES)) begin
        acc <= acc + 16'(n_ovf);
      end
    end
  end
endmodule
