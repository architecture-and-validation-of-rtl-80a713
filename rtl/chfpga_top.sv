// chfpga_top: the chFPGA F-engine signal path of one CRS board in its CHORD configuration.
// Eight ADC inputs each pass through adcdaq and a channelizer (function generator, 4-tap PFB,
// 16384-point real FFT, per-bin scaler to (4+4i) bits). The internal corner turn gathers the
// eight channels' bytes of each clock into one word for upack, which assembles 16-frame sets into
// table-driven packets for the 100 GbE MAC. ucap takes periodic bursts from the channel probes
// for the slow monitoring link. sync_seq starts all inputs together on a selected 10 MHz
// reference edge and numbers the frames.
// Outside this module (brought out as ports): the RF-ADCs, the 100 GbE MAC, the 1 GbE UDP
// packetizer, the processor and its register bus (configuration arrives as ports and through
// the single table-write port cfg_wr).
// USE_UCORR selects the back end, as the two builds of the firmware do: the UPACK packetizer
// (default, the CHORD build) or the UCORR eight-input correlator (the single-board correlator).
// All eight channels share the frame strobe, so their outputs are aligned and the corner turn is
// pure wiring. Timing: output bins of input frame f start FRAME_WORDS + log2(FRAME_WORDS) + 7
// clocks after that frame's first ADC word; packets of a set start right after its last frame.
module chfpga_top
  import chfpga_pkg::*;
#(
  parameter int unsigned N_IN        = N_INPUTS,
  parameter int unsigned LANES       = SPC,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC,
  parameter int unsigned UCAP_SLOTS  = 16,
  parameter int unsigned NFR         = 16,
  parameter int unsigned NPKT        = 128,
  parameter int unsigned BPP         = 48,
  parameter int unsigned QUANT_LSB   = 32,
  parameter bit          USE_UCORR   = 1'b0   // 0: CHORD packetizer build, 1: correlator build
) (
  input  logic                     clk,
  input  logic                     rst,
  // RF-ADC data ports
  input  logic signed [ADC_W-1:0]  adc_data [N_IN][LANES],
  input  logic [N_IN-1:0]          adc_ovr,
  // synchronization
  input  logic                     sync_arm,
  input  logic                     pps,
  input  logic                     ref10m,
  input  logic [63:0]              frame_no_init,
  output logic                     running,
  output logic                     sync_armed,
  output logic [63:0]              frame_no,
  // configuration
  input  chan_cfg_t                cfg [N_IN],
  input  logic                     seed_load,
  input  cfg_wr_t                  cfg_wr,
  input  logic                     ovf_clear,
  input  logic                     stats_single_bin,
  input  logic [$clog2(FRAME_WORDS*LANES/2)-1:0] stats_bin,
  input  logic [15:0]              stats_period,
  // status
  output logic [15:0]              adc_ovf_count [N_IN],
  output logic [N_IN-1:0]          adc_ovf_sticky,
  output logic [15:0]              fg_ovf_count [N_IN],
  output logic [31:0]              stats_count [N_IN],
  // UCAP capture stream (to the 1 GbE UDP packetizer)
  input  logic                     ucap_enable,
  input  logic [31:0]              ucap_period,
  input  logic [1:0]               ucap_n_log2,
  input  logic [$clog2(N_IN)-1:0]  ucap_first_input,
  output logic [31:0]              ucap_data,
  output logic                     ucap_valid,
  input  logic                     ucap_ready,
  output logic                     ucap_first,
  output logic                     ucap_last,
  output logic [$clog2(UCAP_SLOTS)-1:0] ucap_slot,
  output logic                     ucap_odd,
  output logic [15:0]              ucap_bursts,
  output logic [15:0]              ucap_skipped,
  // UPACK stream (to the 100 GbE MAC)
  input  logic                     upack_enable,
  input  logic [7:0]               board_id,
  input  logic [$clog2(NPKT+1)-1:0] pkt_count,
  output logic [511:0]             tx_tdata,
  output logic                     tx_tvalid,
  input  logic                     tx_tready,
  output logic                     tx_tlast,
  output logic [15:0]              upack_sets,
  output logic [15:0]              upack_overruns,
  output logic                     upack_busy,
  // UCORR stream (correlator build only; to the 1 GbE UDP packetizer)
  input  logic                     ucorr_enable,
  input  logic [16:0]              ucorr_int_frames,
  output logic [35:0]              ucorr_data,
  output logic                     ucorr_valid,
  input  logic                     ucorr_ready,
  output logic                     ucorr_first,
  output logic                     ucorr_last,
  output logic [$clog2(FRAME_WORDS*LANES/2)-1:0] ucorr_bin,
  output logic [$clog2(N_IN*(N_IN+1)/2)-1:0]     ucorr_prod,
  output logic [63:0]              ucorr_frame_no,
  output logic [15:0]              ucorr_dumps,
  output logic [15:0]              ucorr_dropped
);
  localparam int NB = LANES / 2;
  localparam int AW = $clog2(FRAME_WORDS);

  logic sof;
  sync_seq #(.FRAME_WORDS(FRAME_WORDS)) u_sync (
    .clk, .rst, .arm(sync_arm), .pps, .ref10m, .frame_no_init,
    .sof, .frame_no, .running, .armed(sync_armed)
  );

  logic [7:0]   q      [N_IN][NB];
  logic [N_IN-1:0] q_sof, probe_sof, probe_odd, stats_done;
  logic [63:0]  q_fno  [N_IN];
  logic [127:0] probe  [N_IN];

  for (genvar c = 0; c < N_IN; c++) begin : g_chan
    logic signed [ADC_W-1:0] daq_out [LANES];
    logic                    daq_sof;
    logic [7:0]              cq [NB];
    adcdaq #(.LANES(LANES), .W(ADC_W)) u_daq (
      .clk, .rst, .sof_in(sof), .adc_data(adc_data[c]), .adc_ovr(adc_ovr[c]), .ovf_clear,
      .data_out(daq_out), .sof_out(daq_sof), .ovf_frame_count(adc_ovf_count[c]),
      .ovf_sticky(adc_ovf_sticky[c])
    );

    logic sel;
    assign sel = (cfg_wr.chan == 4'hF) || (cfg_wr.chan == 4'(c));
    channelizer #(.LANES(LANES), .FRAME_WORDS(FRAME_WORDS), .QUANT_LSB(QUANT_LSB)) u_chan (
      .clk, .rst, .sof_in(daq_sof), .din(daq_out), .frame_no, .cfg(cfg[c]), .seed_load,
      .wave_we   (cfg_wr.we && cfg_wr.target == WR_FG_WAVE && sel),
      .wave_addr (cfg_wr.addr[AW-1:0]),
      .wave_data (cfg_wr.data[LANES*ADC_W-1:0]),
      .gain_we   (cfg_wr.we && cfg_wr.target == WR_GAIN && sel),
      .gain_wbank(cfg_wr.addr[AW]),
      .gain_waddr(cfg_wr.addr[AW-1:0]),
      .gain_wdata(cfg_wr.data[NB*GAIN_W-1:0]),
      .stats_single_bin, .stats_bin, .stats_period,
      .q_sof(q_sof[c]), .q_frame_no(q_fno[c]), .q(cq),
      .probe_data(probe[c]), .probe_sof(probe_sof[c]), .probe_odd(probe_odd[c]),
      .fg_ovf_count(fg_ovf_count[c]), .stats_count(stats_count[c]), .stats_done(stats_done[c])
    );
    // internal corner turn: every channel's bytes of this clock go side by side to upack
    for (genvar b = 0; b < NB; b++) begin : g_ct
      assign q[c][b] = cq[b];
    end
  end

  ucap #(.N_IN(N_IN), .FRAME_WORDS(FRAME_WORDS), .SLOTS(UCAP_SLOTS)) u_ucap (
    .clk, .rst, .probe_data(probe), .probe_sof, .probe_odd,
    .enable(ucap_enable), .period_frames(ucap_period), .n_log2(ucap_n_log2),
    .first_input(ucap_first_input),
    .out_data(ucap_data), .out_valid(ucap_valid), .out_ready(ucap_ready),
    .out_first(ucap_first), .out_last(ucap_last), .out_slot(ucap_slot), .out_odd(ucap_odd),
    .bursts(ucap_bursts), .skipped(ucap_skipped)
  );

  // the packetizer and the correlator share the same on-chip RAM: one or the other is built
  if (!USE_UCORR) begin : g_upack
    upack #(.N_IN(N_IN), .BINS(NB), .FRAME_WORDS(FRAME_WORDS), .NFR(NFR), .NPKT(NPKT), .BPP(BPP)) u_upack (
      .clk, .rst, .enable(upack_enable), .in_sof(q_sof[0]), .in_frame_no(q_fno[0]), .in_q(q),
      .board_id, .pkt_count,
      .tab_we  (cfg_wr.we && cfg_wr.target == WR_RDTABLE),
      .tab_addr(cfg_wr.addr[$clog2(NPKT*BPP)-1:0]),
      .tab_data(cfg_wr.data[15:0]),
      .hdr_we  (cfg_wr.we && cfg_wr.target == WR_HEADER),
      .hdr_addr(cfg_wr.addr[$clog2(NPKT*16)-1:0]),
      .hdr_data(cfg_wr.data[31:0]),
      .tdata(tx_tdata), .tvalid(tx_tvalid), .tready(tx_tready), .tlast(tx_tlast),
      .sets_done(upack_sets), .overruns(upack_overruns), .busy(upack_busy)
    );
    assign ucorr_data     = '0;
    assign ucorr_valid    = 1'b0;
    assign ucorr_first    = 1'b0;
    assign ucorr_last     = 1'b0;
    assign ucorr_bin      = '0;
    assign ucorr_prod     = '0;
    assign ucorr_frame_no = '0;
    assign ucorr_dumps    = '0;
    assign ucorr_dropped  = '0;
  end else begin : g_ucorr
    ucorr #(.N_IN(N_IN), .BINS(NB), .FRAME_WORDS(FRAME_WORDS)) u_ucorr (
      .clk, .rst, .enable(ucorr_enable), .int_frames(ucorr_int_frames),
      .in_sof(q_sof[0]), .in_frame_no(q_fno[0]), .in_q(q),
      .out_data(ucorr_data), .out_valid(ucorr_valid), .out_ready(ucorr_ready),
      .out_first(ucorr_first), .out_last(ucorr_last), .out_bin(ucorr_bin), .out_prod(ucorr_prod),
      .out_frame_no(ucorr_frame_no), .dumps(ucorr_dumps), .dropped(ucorr_dropped)
    );
    assign tx_tdata       = '0;
    assign tx_tvalid      = 1'b0;
    assign tx_tlast       = 1'b0;
    assign upack_sets     = '0;
    assign upack_overruns = '0;
    assign upack_busy     = 1'b0;
  end
endmodule
