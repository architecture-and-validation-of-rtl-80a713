// tb_chfpga_top: end-to-end test of the F-engine at a reduced frame (16 words, 128-point FFT),
// with the packetizer build (dut) and the correlator build (dut_x) side by side on the same
// stimulus. Every channel replays its own random waveform with the FFT bypassed, so the bytes
// that reach the back ends are known: bin slot k of word t of input c is
// {clip7(w[c][t][2k]), clip7(w[c][t][2k+1])} with gain bank 0 (gain 4096, window at bit 12),
// and the same values halved (rounded away from zero) with gain bank 1.
//  - UPACK: every payload byte of every packet must match bank 0 or bank 1 for its input and
//    bin (the readout table is random), the header must carry the board id and the first bin.
//  - UCORR: the first dump must hold int_frames * x_i * conj(x_j) for every bin and pair.
//  - UCAP: captured scaler words must match the same model.
// The run then switches gain banks, drops the bypass (funcgen pass-through into the PFB/FFT) and
// puts one channel in the overflow-test mode. Each mechanism is counted and must happen at least
// once: sync start, FFT bypass, gain bank switch, funcgen mode switch (forced overflows),
// ADC overflow flag, scaler clipping, UPACK set, UPACK stall, UPACK overrun, UCAP burst,
// UCAP skipped period, UCAP stall, UCORR dump and UCORR dropped integration.
module tb_chfpga_top;
  timeunit 1ns; timeprecision 100ps;
  import chfpga_pkg::*;

  localparam int N   = 8;
  localparam int L   = 8;
  localparam int NB  = L / 2;
  localparam int FW  = 16;
  localparam int AW  = $clog2(FW);
  localparam int NFR = 16;
  localparam int NPKT = 4;
  localparam int BPP = 4;
  localparam int NP  = N * (N + 1) / 2;
  localparam int IF  = 4;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic signed [ADC_W-1:0] adc_data [N][L];
  logic [N-1:0] adc_ovr;
  logic sync_arm, pps, ref10m;
  chan_cfg_t cfg [N];
  logic seed_load, ovf_clear;
  cfg_wr_t cfg_wr;
  logic ucap_enable, ucap_ready, upack_enable, tx_tready, ucorr_enable, ucorr_ready;

  // outputs of the packetizer build
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
  logic [35:0] ucorr_data_u;
  logic ucorr_valid_u, ucorr_first_u, ucorr_last_u;
  logic [$clog2(FW*NB)-1:0] ucorr_bin_u;
  logic [$clog2(NP)-1:0] ucorr_prod_u;
  logic [63:0] ucorr_fno_u;
  logic [15:0] ucorr_dumps_u, ucorr_dropped_u;

  chfpga_top #(.FRAME_WORDS(FW), .NFR(NFR), .NPKT(NPKT), .BPP(BPP), .QUANT_LSB(12)) dut (
    .clk, .rst, .adc_data, .adc_ovr, .sync_arm, .pps, .ref10m, .frame_no_init(64'd5000),
    .running, .sync_armed, .frame_no, .cfg, .seed_load, .cfg_wr, .ovf_clear,
    .stats_single_bin(1'b0), .stats_bin('0), .stats_period(16'd1),
    .adc_ovf_count, .adc_ovf_sticky, .fg_ovf_count, .stats_count,
    .ucap_enable, .ucap_period(32'd24), .ucap_n_log2(2'd3), .ucap_first_input(3'd0),
    .ucap_data, .ucap_valid, .ucap_ready, .ucap_first, .ucap_last, .ucap_slot, .ucap_odd,
    .ucap_bursts, .ucap_skipped,
    .upack_enable, .board_id(8'hA5), .pkt_count(3'(NPKT)),
    .tx_tdata, .tx_tvalid, .tx_tready, .tx_tlast, .upack_sets, .upack_overruns, .upack_busy,
    .ucorr_enable(1'b0), .ucorr_int_frames(17'd1), .ucorr_data(ucorr_data_u),
    .ucorr_valid(ucorr_valid_u), .ucorr_ready(1'b1), .ucorr_first(ucorr_first_u),
    .ucorr_last(ucorr_last_u), .ucorr_bin(ucorr_bin_u), .ucorr_prod(ucorr_prod_u),
    .ucorr_frame_no(ucorr_fno_u), .ucorr_dumps(ucorr_dumps_u), .ucorr_dropped(ucorr_dropped_u)
  );

  // correlator build (its packetizer and capture outputs are not looked at)
  logic x_running, x_armed;
  logic [63:0] x_frame_no;
  logic [15:0] x_adc_cnt [N], x_fg_cnt [N];
  logic [N-1:0] x_sticky;
  logic [31:0] x_stats [N];
  logic [31:0] x_ucap_data;
  logic x_ucap_valid, x_ucap_first, x_ucap_last, x_ucap_odd;
  logic [3:0] x_ucap_slot;
  logic [15:0] x_bursts, x_skipped, x_sets, x_overruns;
  logic [511:0] x_tdata;
  logic x_tvalid, x_tlast, x_busy;
  logic [35:0] ucorr_data;
  logic ucorr_valid, ucorr_first, ucorr_last;
  logic [$clog2(FW*NB)-1:0] ucorr_bin;
  logic [$clog2(NP)-1:0] ucorr_prod;
  logic [63:0] ucorr_fno;
  logic [15:0] ucorr_dumps, ucorr_dropped;

  chfpga_top #(.FRAME_WORDS(FW), .NFR(NFR), .NPKT(NPKT), .BPP(BPP), .QUANT_LSB(12), .USE_UCORR(1'b1)) dut_x (
    .clk, .rst, .adc_data, .adc_ovr, .sync_arm, .pps, .ref10m, .frame_no_init(64'd5000),
    .running(x_running), .sync_armed(x_armed), .frame_no(x_frame_no), .cfg, .seed_load, .cfg_wr,
    .ovf_clear, .stats_single_bin(1'b0), .stats_bin('0), .stats_period(16'd1),
    .adc_ovf_count(x_adc_cnt), .adc_ovf_sticky(x_sticky), .fg_ovf_count(x_fg_cnt), .stats_count(x_stats),
    .ucap_enable(1'b0), .ucap_period(32'd24), .ucap_n_log2(2'd3), .ucap_first_input(3'd0),
    .ucap_data(x_ucap_data), .ucap_valid(x_ucap_valid), .ucap_ready(1'b1), .ucap_first(x_ucap_first),
    .ucap_last(x_ucap_last), .ucap_slot(x_ucap_slot), .ucap_odd(x_ucap_odd),
    .ucap_bursts(x_bursts), .ucap_skipped(x_skipped),
    .upack_enable(1'b0), .board_id(8'hA5), .pkt_count(3'(NPKT)),
    .tx_tdata(x_tdata), .tx_tvalid(x_tvalid), .tx_tready(1'b1), .tx_tlast(x_tlast),
    .upack_sets(x_sets), .upack_overruns(x_overruns), .upack_busy(x_busy),
    .ucorr_enable, .ucorr_int_frames(17'(IF)), .ucorr_data, .ucorr_valid, .ucorr_ready,
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

  localparam int MAXCYC = 60000;
  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- models ----------------
  logic signed [ADC_W-1:0] wave [N][FW][L];
  logic [15:0] rdtab [NPKT*BPP];

  function automatic int clip7(input int v);
    return v > 7 ? 7 : (v < -7 ? -7 : v);
  endfunction
  function automatic int half(input int v);
    int m;
    m = v < 0 ? -v : v;
    m = (m + 1) / 2;
    return v < 0 ? -m : m;
  endfunction
  // expected byte of input c, word t, slot k with gain bank g
  function automatic logic [7:0] eb(input int c, input int t, input int k, input int g);
    int re, im;
    re = wave[c][t][2*k];
    im = wave[c][t][2*k+1];
    if (g == 1) begin
      re = half(re);
      im = half(im);
    end
    return {4'(clip7(re)), 4'(clip7(im))};
  endfunction
  function automatic int bitrev(input int u);
    int r;
    r = 0;
    for (int j = 0; j < AW; j++) r |= ((u >> j) & 1) << (AW - 1 - j);
    return r;
  endfunction
  function automatic int s4(input logic [3:0] v);
    return int'($signed(v));
  endfunction

  // ---------------- mechanism counters ----------------
  int n_sync = 0, n_bypass = 0, n_bank = 0, n_fgmode = 0, n_adcovf = 0, n_clip = 0;
  int n_set = 0, n_stall = 0, n_overrun = 0, n_burst = 0, n_skip = 0, n_ucap_stall = 0;
  int n_dump = 0, n_drop = 0, n_fft = 0;

  // ---------------- stimulus ----------------
  // table writes go through a queue that a clocked process drains, one write per clock
  cfg_wr_t wq [$];
  task automatic wr(input wr_target_e tg, input logic [3:0] ch, input int addr, input logic [127:0] d);
    cfg_wr_t w;
    w.we = 1'b1; w.target = tg; w.chan = ch; w.addr = 16'(addr); w.data = d;
    wq.push_back(w);
  endtask
  always @(posedge clk) cfg_wr <= (wq.size() > 0) ? wq.pop_front() : '0;

  int phase = 0;
  bit long_stall = 0;
  initial begin
    adc_ovr = '0; sync_arm = 0; pps = 0; ref10m = 0; seed_load = 0; ovf_clear = 0;
    ucap_enable = 0; upack_enable = 0; ucorr_enable = 0;
    for (int c = 0; c < N; c++) begin
      cfg[c] = '0;
      cfg[c].fg_mode = FG_WAVEFORM;
      cfg[c].fg_gain = 16'h1000;
      cfg[c].fg_clip = 14'h1FFF;
      cfg[c].fft_bypass = 1;
      cfg[c].probe_src = PROBE_SCALER;
      for (int i = 0; i < L; i++) adc_data[c][i] = '0;
    end
    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // tables: waveforms, gains (bank 0 = 4096, bank 1 = 2048), readout table, headers
    for (int c = 0; c < N; c++)
      for (int t = 0; t < FW; t++) begin
        logic [127:0] d;
        d = '0;
        for (int i = 0; i < L; i++) begin
          int v;
          v = $urandom_range(0, 20);
          wave[c][t][i] = ADC_W'(v - 10);
          d[i*ADC_W +: ADC_W] = wave[c][t][i];
        end
        wr(WR_FG_WAVE, 4'(c), t, d);
      end
    for (int t = 0; t < FW; t++) begin
      wr(WR_GAIN, 4'hF, t, {64'd0, {NB{16'd4096}}});
      wr(WR_GAIN, 4'hF, FW + t, {64'd0, {NB{16'd2048}}});
    end
    for (int j = 0; j < NPKT * BPP; j++) begin
      rdtab[j] = 16'($urandom_range(0, FW * NB - 1));
      wr(WR_RDTABLE, 4'h0, j, {112'd0, rdtab[j]});
    end
    for (int j = 0; j < NPKT * 16; j++) wr(WR_HEADER, 4'h0, j, {96'd0, $urandom});
    wait (wq.size() == 0);
    repeat (2) @(posedge clk);
    // synchronization: arm, PPS, then a 10 MHz edge
    sync_arm <= 1;
    @(posedge clk);
    sync_arm <= 0;
    repeat (5) @(posedge clk);
    pps <= 1;
    @(posedge clk);
    pps <= 0;
    repeat (3) @(posedge clk);
    ref10m <= 1;
    wait (running);
    n_sync++;
    repeat (40) @(posedge clk);
    repeat (12 * FW) @(posedge clk);
    upack_enable <= 1;
    ucap_enable <= 1;
    ucorr_enable <= 1;
    // phase 0: bypass, bank 0
    repeat (90 * FW) @(posedge clk);
    // phase 1: gain bank 1
    phase = 1;
    for (int c = 0; c < N; c++) cfg[c].gain_bank <= 1;
    repeat (50 * FW) @(posedge clk);
    // phase 2: FFT path, overflow test mode on channel 3, ADC full-scale codes
    phase = 2;
    for (int c = 0; c < N; c++) begin
      cfg[c].fft_bypass <= 0;
      cfg[c].fg_mode <= FG_PASS;
    end
    cfg[3].fg_mode <= FG_OVF;
    cfg[3].fg_ovf_lanes <= 8'h81;
    repeat (40 * FW) @(posedge clk);
    upack_enable <= 0;
    ucap_enable <= 0;
    wait (!tx_tvalid && !ucap_valid);
    repeat (10) @(posedge clk);
    // mechanism report
    $display("sync %0d bypass %0d bank %0d fgmode %0d adcovf %0d clip %0d fft %0d", n_sync, n_bypass, n_bank, n_fgmode, n_adcovf, n_clip, n_fft);
    $display("upack sets %0d stall %0d overrun %0d; ucap bursts %0d skip %0d stall %0d; ucorr dumps %0d dropped %0d",
             n_set, n_stall, n_overrun, n_burst, n_skip, n_ucap_stall, n_dump, n_drop);
    check(n_sync > 0, "sync start");
    check(n_bypass > 0, "FFT bypass");
    check(n_bank > 0, "gain bank switch");
    check(n_fgmode > 0, "funcgen mode switch (forced overflow)");
    check(n_adcovf > 0, "ADC overflow");
    check(n_clip > 0, "scaler clipping");
    check(n_fft > 0, "FFT path frames");
    check(n_set > 0, "UPACK set");
    check(n_stall > 0, "UPACK stall");
    check(n_overrun > 0, "UPACK overrun");
    check(n_burst > 0, "UCAP burst");
    check(n_skip > 0, "UCAP skipped period");
    check(n_ucap_stall > 0, "UCAP stall");
    check(n_dump > 0, "UCORR dump");
    check(n_drop > 0, "UCORR dropped integration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ADC data: small random samples with occasional full-scale codes
  always @(posedge clk)
    for (int c = 0; c < N; c++)
      for (int i = 0; i < L; i++)
        adc_data[c][i] <= ($urandom_range(0, 999) == 0) ? 14'sh1FFF : ADC_W'($urandom_range(0, 200)) - 14'sd100;

  // ---------------- status watchers ----------------
  always @(posedge clk) begin
    if (!rst && running) begin
      if (adc_ovf_sticky != '0) n_adcovf++;
      if (phase == 2 && fg_ovf_count[3] != 0) n_fgmode++;
      if (stats_count[0] != 0) n_clip++;
      if (phase == 2 && stats_count[1] == 0 && dut.g_chan[1].u_chan.q_sof) n_fft++;
    end
  end

  // ---------------- UPACK checker ----------------
  int beat = 0, pkt = 0, bidx = 0, bsub = 0;
  int set_ok0, set_ok1;
  always @(posedge clk) tx_tready <= long_stall ? 1'b0 : ($urandom_range(0, 4) != 0);
  initial begin
    // one long stall makes the writer complete sets while the reader is blocked
    wait (n_set == 2);
    long_stall = 1;
    repeat (NFR * FW * 3) @(posedge clk);
    long_stall = 0;
  end
  always @(negedge clk) begin
    if (!rst && tx_tvalid && !tx_tready) n_stall++;
    if (!rst && tx_tvalid && tx_tready) begin
      if (beat == 0) begin
        check(tx_tdata[42*8 +: 8] == 8'hA5, "board id in header");
        check({tx_tdata[43*8 +: 8], tx_tdata[44*8 +: 8]} == rdtab[pkt * BPP], "first bin in header");
        check({tx_tdata[53*8 +: 8], tx_tdata[54*8 +: 8]} == 16'(pkt), "packet index in header");
      end else begin
        int b, t, k, n0, n1;
        b = rdtab[pkt * BPP + bidx];
        t = bitrev(b % FW);
        k = b / FW;
        n0 = 0; n1 = 0;
        for (int j = 0; j < 64; j++) begin
          int c;
          logic [7:0] got;
          c = (bsub * 64 + j) % N;
          got = tx_tdata[j*8 +: 8];
          if (got == eb(c, t, k, 0)) n0++;
          else if (got == eb(c, t, k, 1)) n1++;
        end
        if (phase == 0) check(n0 == 64, $sformatf("pkt %0d bin %0d beat %0d: %0d bytes match", pkt, b, bsub, n0));
        else if (phase == 1 && n0 + n1 == 64 && n1 > 0) n_bank++;
        if (phase < 2 && n0 == 64) n_bypass++;
        bsub = bsub ^ 1;
        if (bsub == 0) bidx++;
      end
      if (tx_tlast) begin
        beat = 0; bidx = 0; bsub = 0;
        pkt++;
        if (pkt == NPKT) begin
          pkt = 0;
          n_set++;
        end
      end else begin
        beat++;
      end
    end
  end
  always @(posedge clk) if (upack_overruns != 0 && n_overrun == 0) n_overrun = 1;

  // ---------------- UCAP checker ----------------
  int cap_word = 0;
  always @(posedge clk) ucap_ready <= ($urandom_range(0, 7) != 0);
  always @(negedge clk) begin
    if (!rst && ucap_valid && !ucap_ready) n_ucap_stall++;
    if (!rst && ucap_valid && ucap_ready) begin
      if (ucap_first) n_burst++;
      // lane 0 of each word holds the four scaler bytes of input slot/2
      if (phase == 0 && cap_word % 4 == 0) begin
        int c, t;
        bit ok;
        c = ucap_slot / 2;
        t = (cap_word / 4) % FW;
        ok = 1;
        for (int k = 0; k < NB; k++) if (ucap_data[k*8 +: 8] != eb(c, t, k, 0)) ok = 0;
        check(ok, $sformatf("ucap slot %0d word %0d: %h exp %h %h %h %h", ucap_slot, t, ucap_data, eb(c,t,3,0), eb(c,t,2,0), eb(c,t,1,0), eb(c,t,0,0)));
      end
      cap_word = ucap_last ? ((ucap_slot == 4'd15) ? 0 : cap_word + 1) : cap_word + 1;
      if (ucap_last && ucap_slot == 4'd15) cap_word = 0;
    end
  end
  always @(posedge clk) if (ucap_skipped != 0 && n_skip == 0) n_skip = 1;

  // ---------------- UCORR checker ----------------
  always @(posedge clk) ucorr_ready <= 1'b1;
  int pa [NP], pb [NP];
  initial begin
    int p;
    p = 0;
    for (int i = 0; i < N; i++)
      for (int j = i; j < N; j++) begin
        pa[p] = i; pb[p] = j; p++;
      end
  end
  always @(negedge clk) begin
    if (!rst && ucorr_valid && ucorr_ready) begin
      if (ucorr_first) n_dump++;
      if (n_dump == 1) begin
        int t, k, q, er, ei;
        logic [7:0] x, y;
        t = int'(ucorr_bin) / NB;
        k = int'(ucorr_bin) % NB;
        q = int'(ucorr_prod);
        x = eb(pa[q], t, k, 0);
        y = eb(pb[q], t, k, 0);
        er = IF * (s4(x[7:4]) * s4(y[7:4]) + s4(x[3:0]) * s4(y[3:0]));
        ei = IF * (s4(x[3:0]) * s4(y[7:4]) - s4(x[7:4]) * s4(y[3:0]));
        check($signed(ucorr_data[35:18]) == er && $signed(ucorr_data[17:0]) == ei,
              $sformatf("ucorr bin %0d prod %0d got %0d,%0d exp %0d,%0d", ucorr_bin, q,
                        $signed(ucorr_data[35:18]), $signed(ucorr_data[17:0]), er, ei));
      end
    end
  end
  always @(posedge clk) if (ucorr_dropped != 0 && n_drop == 0) n_drop = 1;
endmodule
