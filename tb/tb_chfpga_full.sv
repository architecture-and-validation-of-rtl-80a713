// tb_chfpga_full: one complete CHORD operation of the top at its default size (eight inputs,
// 16384-sample frames, 8192 bins, 16-frame sets, 128 packets of 48 bins), with no parameter
// overrides. Every input carries the same bin-centred tone (bin 100 of the 16384-point FFT) in
// pass-through mode; all gains are 4096 with the default window, so the tone bin clips to
// +/-7 and every bin far from it quantizes to zero. The readout table lists bins 0..6143 in
// order (packet p carries bins 48p .. 48p+47). The test waits for the first full set and
// checks all 128 packets: header fields (board id, first bin, packet index), packet length
// (1 header beat + 96 payload beats), and every payload byte: bins 98..102 may be anything,
// the tone bin must be clipped for every input and frame, and all other bytes must be zero.
module tb_chfpga_full;
  timeunit 1ns; timeprecision 100ps;
  import chfpga_pkg::*;

  localparam int N   = N_INPUTS;
  localparam int L   = SPC;
  localparam int FW  = FRAME_LEN / SPC;
  localparam int NPKT = 128;
  localparam int BPP = 48;
  localparam int K0  = 100;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic signed [ADC_W-1:0] adc_data [N][L];
  logic [N-1:0] adc_ovr = '0;
  logic sync_arm = 0, pps = 0, ref10m = 0;
  chan_cfg_t cfg [N];
  cfg_wr_t cfg_wr;
  logic upack_enable = 0;
  logic running, sync_armed;
  logic [63:0] frame_no;
  logic [15:0] adc_ovf_count [N];
  logic [N-1:0] adc_ovf_sticky;
  logic [15:0] fg_ovf_count [N];
  logic [31:0] stats_count [N];
  logic [31:0] ucap_data;
  logic ucap_valid, ucap_first, ucap_last, ucap_odd;
  logic [3:0] ucap_slot;
  logic [15:0] ucap_bursts, ucap_skipped;
  logic [511:0] tx_tdata;
  logic tx_tvalid, tx_tlast, upack_busy;
  logic [15:0] upack_sets, upack_overruns;
  logic [35:0] ucorr_data;
  logic ucorr_valid, ucorr_first, ucorr_last;
  logic [12:0] ucorr_bin;
  logic [5:0] ucorr_prod;
  logic [63:0] ucorr_fno;
  logic [15:0] ucorr_dumps, ucorr_dropped;

  chfpga_top dut (
    .clk, .rst, .adc_data, .adc_ovr, .sync_arm, .pps, .ref10m, .frame_no_init(64'd0),
    .running, .sync_armed, .frame_no, .cfg, .seed_load(1'b0), .cfg_wr, .ovf_clear(1'b0),
    .stats_single_bin(1'b0), .stats_bin('0), .stats_period(16'd1),
    .adc_ovf_count, .adc_ovf_sticky, .fg_ovf_count, .stats_count,
    .ucap_enable(1'b0), .ucap_period(32'd100), .ucap_n_log2(2'd0), .ucap_first_input(3'd0),
    .ucap_data, .ucap_valid, .ucap_ready(1'b1), .ucap_first, .ucap_last, .ucap_slot, .ucap_odd,
    .ucap_bursts, .ucap_skipped,
    .upack_enable, .board_id(8'h3C), .pkt_count(8'(NPKT)),
    .tx_tdata, .tx_tvalid, .tx_tready(1'b1), .tx_tlast, .upack_sets, .upack_overruns, .upack_busy,
    .ucorr_enable(1'b0), .ucorr_int_frames(17'd1), .ucorr_data, .ucorr_valid, .ucorr_ready(1'b1),
    .ucorr_first, .ucorr_last, .ucorr_bin, .ucorr_prod, .ucorr_frame_no(ucorr_fno),
    .ucorr_dumps, .ucorr_dropped
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // table writes: a queue drained one write per clock
  cfg_wr_t wq [$];
  task automatic wr(input wr_target_e tg, input int addr, input logic [127:0] d);
    cfg_wr_t w;
    w.we = 1'b1; w.target = tg; w.chan = 4'hF; w.addr = 16'(addr); w.data = d;
    wq.push_back(w);
  endtask
  always @(posedge clk) cfg_wr <= (wq.size() > 0) ? wq.pop_front() : '0;

  // tone samples: n = word * 8 + lane within the frame
  logic signed [ADC_W-1:0] tone [FW][L];
  int widx = 0;
  always @(posedge clk) begin
    widx <= (dut.sof) ? 1 : (widx + 1) % FW;
    for (int c = 0; c < N; c++)
      for (int i = 0; i < L; i++)
        adc_data[c][i] <= tone[dut.sof ? 0 : widx][i];
  end

  initial begin
    for (int t = 0; t < FW; t++)
      for (int i = 0; i < L; i++)
        tone[t][i] = ADC_W'($rtoi($floor(4000.0 * $cos(2.0 * 3.14159265358979 * K0 * (t * L + i) / FRAME_LEN + 0.7) + 0.5)));
    for (int c = 0; c < N; c++) begin
      cfg[c] = '0;
      cfg[c].fg_mode = FG_PASS;
      cfg[c].fg_gain = 16'h1000;
      cfg[c].fg_clip = 14'h1FFF;
      for (int i = 0; i < L; i++) adc_data[c][i] = '0;
    end
    repeat (4) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < FW; t++) wr(WR_GAIN, t, {64'd0, {4{16'd4096}}});
    for (int j = 0; j < NPKT * BPP; j++) wr(WR_RDTABLE, j, 128'(j));
    wait (wq.size() == 0);
    repeat (2) @(posedge clk);
    sync_arm <= 1;
    @(posedge clk);
    sync_arm <= 0;
    pps <= 1;
    @(posedge clk);
    pps <= 0;
    ref10m <= 1;
    wait (running);
    // start packing once the PFB history holds tone frames only
    repeat (6 * FW) @(posedge clk);
    upack_enable <= 1;
    wait (n_pkt == NPKT);
    repeat (10) @(posedge clk);
    $display("packets %0d sets %0d overruns %0d", n_pkt, upack_sets, upack_overruns);
    check(upack_overruns == 0, "no overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_pkt = 0, beat = 0;
  always @(negedge clk) begin
    if (!rst && tx_tvalid) begin
      if (beat == 0) begin
        check(tx_tdata[42*8 +: 8] == 8'h3C, "board id");
        check({tx_tdata[43*8 +: 8], tx_tdata[44*8 +: 8]} == 16'(n_pkt * BPP), "first bin");
        check({tx_tdata[53*8 +: 8], tx_tdata[54*8 +: 8]} == 16'(n_pkt), "packet index");
      end else begin
        int bin, d;
        bit ok;
        bin = n_pkt * BPP + (beat - 1) / 2;
        d = bin > K0 ? bin - K0 : K0 - bin;
        ok = 1;
        for (int j = 0; j < 64; j++) begin
          logic [7:0] v;
          v = tx_tdata[j*8 +: 8];
          if (bin == K0 && !(v[7:4] inside {4'h7, 4'h9} || v[3:0] inside {4'h7, 4'h9})) ok = 0;
          if (d > 2 && v != 8'h00) ok = 0;
        end
        check(ok, $sformatf("packet %0d bin %0d beat %0d: %h", n_pkt, bin, beat, tx_tdata[127:0]));
      end
      check(tx_tlast == (beat == 2 * BPP), "tlast at packet end");
      if (tx_tlast) begin
        beat = 0;
        n_pkt++;
      end else begin
        beat++;
      end
    end
  end
endmodule
