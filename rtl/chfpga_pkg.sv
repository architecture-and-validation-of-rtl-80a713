// chfpga_pkg: types and constants shared by the chFPGA F-engine channelizer path.
// The numbers follow the CHORD configuration: 3.2 GS/s, 8 samples per 400 MHz clock, 14-bit ADC,
// frames of M = 16384 samples (2048 clocks), 8192 bins delivered 4 per clock, 8 inputs per board.
// Encodings of the mode fields and of the configuration write bus are this design's own choices.
package chfpga_pkg;
  localparam int unsigned N_INPUTS      = 8;      // ADC inputs per board
  localparam int unsigned SPC           = 8;      // samples per clock
  localparam int unsigned ADC_W         = 14;     // ADC resolution
  localparam int unsigned FRAME_LEN     = 16384;  // M, samples per frame
  localparam int unsigned PFB_W         = 18;     // PFB output / FFT input width
  localparam int unsigned FFT_OUT_W     = 32;     // FFT output width per component
  localparam int unsigned BINS_PER_CLK  = SPC / 2;
  localparam int unsigned GAIN_W        = 16;     // digital gain width (48 = 32 + 16)

  typedef enum logic [2:0] {
    FG_PASS      = 3'd0,  // ADC data unchanged
    FG_SCALE     = 3'd1,  // multiply by gain, clip to +/- clip level
    FG_WAVEFORM  = 3'd2,  // replay the programmed one-frame waveform
    FG_PRN       = 3'd3,  // pseudorandom noise from a user seed
    FG_OVF       = 3'd4,  // ADC data with selected lanes forced to full scale
    FG_SAMPLE_NO = 3'd5,  // each sample holds its sample number within the frame
    FG_FRAME_NO  = 3'd6   // each sample holds the frame number
  } fg_mode_e;

  typedef enum logic [1:0] {
    PROBE_ADC    = 2'd0,  // function generator output (time stream)
    PROBE_FFT    = 2'd1,  // full (32+32i) FFT, two of four bins, alternating per frame
    PROBE_SCALER = 2'd2   // (4+4i) scaler output
  } probe_src_e;

  // Run-time configuration of one channelizer (memory-mapped registers in a full system).
  typedef struct packed {
    fg_mode_e           fg_mode;
    logic [15:0]        fg_gain;       // unsigned, 4.12 fixed point (FG_SCALE)
    logic [13:0]        fg_clip;       // clip level (FG_SCALE)
    logic [31:0]        fg_seed;       // PRN seed, loaded at fg_seed_load
    logic [SPC-1:0]     fg_ovf_lanes;  // lanes forced to full scale (FG_OVF)
    logic               fft_bypass;    // feed function generator data straight to the scaler
    logic               gain_bank;     // active scaler gain bank
    probe_src_e         probe_src;
  } chan_cfg_t;

  // Memory write port shared by all programmable tables.
  typedef enum logic [1:0] {
    WR_FG_WAVE  = 2'd0,   // function generator waveform, addr = word (0..2047), data = 8 x 14 bits
    WR_GAIN     = 2'd1,   // scaler gains, addr = {bank, word}, data = 4 x 16 bits
    WR_RDTABLE  = 2'd2,   // UPACK readout table, addr = entry, data = bin number
    WR_HEADER   = 2'd3    // UPACK packet header templates, addr = {slot, 32-bit lane}
  } wr_target_e;

  typedef struct packed {
    logic        we;
    wr_target_e  target;
    logic [3:0]  chan;    // channel for WR_FG_WAVE / WR_GAIN, 4'hF = all
    logic [15:0] addr;
    logic [127:0] data;
  } cfg_wr_t;

  function automatic int unsigned clog2u(input int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction
endpackage
