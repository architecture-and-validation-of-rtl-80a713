// tb_channelizer: end-to-end test of one channel (function generator, PFB, FFT, scaler, stats,
// frame numbering) at a reduced frame of 16 words x 8 samples (128-point FFT, 64 output bins).
// Phase A: a bin-centred tone goes through the PFB and FFT in pass-through mode with unit gains
// (window at bit 12); once the PFB history is full, the tone bin must clip and every bin two
// or more bins away from it must round to zero. The latency from a frame's first ADC word to
// the scaler's frame strobe is checked against 2 + 2 + (FRAME_WORDS + log2 + 1) + 2 clocks.
// Phase B: FFT bypass with a programmed waveform. The scaler then sees samples 2b, 2b+1 as
// the bin's (re, im). With gain bank 1 (gain 4096, identity) every byte is checked, and so is
// the clipped-bin count per frame from the statistics block. Phase C switches to gain bank 0
// (gain 2048, halving with rounding) at a frame strobe and checks again. q_frame_no is
// checked at every output frame strobe. Checks are made against tb-side models.
module tb_channelizer;
  timeunit 1ns; timeprecision 100ps;
  import chfpga_pkg::*;

  localparam int L  = 8;
  localparam int FW = 16;
  localparam int NB = L / 2;
  localparam int N  = FW * L;
  localparam int NS = $clog2(FW);
  localparam int K0 = 13;
  localparam int LAT_FFT = 2 + 2 + (FW + NS + 1) + 2;
  localparam int LAT_BYP = 2 + 2;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic                    sof_in;
  logic signed [ADC_W-1:0] din [L];
  logic [63:0]             frame_no;
  chan_cfg_t               cfg;
  logic                    seed_load, wave_we, gain_we, gain_wbank;
  logic [$clog2(FW)-1:0]   wave_addr, gain_waddr;
  logic [L*ADC_W-1:0]      wave_data;
  logic [NB*GAIN_W-1:0]    gain_wdata;
  logic                    q_sof, probe_sof, probe_odd, stats_done;
  logic [63:0]             q_frame_no;
  logic [7:0]              q [NB];
  logic [127:0]            probe_data;
  logic [15:0]             fg_ovf_count;
  logic [31:0]             stats_count;

  channelizer #(.LANES(L), .FRAME_WORDS(FW), .QUANT_LSB(12)) dut (
    .clk, .rst, .sof_in, .din, .frame_no, .cfg, .seed_load,
    .wave_we, .wave_addr, .wave_data, .gain_we, .gain_wbank, .gain_waddr, .gain_wdata,
    .stats_single_bin(1'b0), .stats_bin('0), .stats_period(16'd1),
    .q_sof, .q_frame_no, .q, .probe_data, .probe_sof, .probe_odd,
    .fg_ovf_count, .stats_count, .stats_done
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  int phase = 0;                       // 0 tone, 1 bypass bank 1, 2 bypass bank 0
  logic signed [ADC_W-1:0] wave [FW][L];
  int  widx = 0;
  longint fcount = 100;
  longint sof_time [$];
  longint fno_hist [longint];          // frame number of the input frame started at a clock
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int rnd_half(input int v);   // v/2 rounded half away from zero
    int m;
    m = v < 0 ? -v : v;
    m = (m + 1) / 2;
    return v < 0 ? -m : m;
  endfunction
  function automatic int clip7(input int v);
    return v > 7 ? 7 : (v < -7 ? -7 : v);
  endfunction

  // expected byte of bypass-mode bin slot b of word u
  function automatic logic [7:0] exp_byte(input int u, input int b, input int ph);
    int re, im;
    re = wave[u][2*b];
    im = wave[u][2*b+1];
    if (ph == 2) begin
      re = rnd_half(re);
      im = rnd_half(im);
    end
    return {4'(clip7(re)), 4'(clip7(im))};
  endfunction

  initial begin
    sof_in = 0; frame_no = 0; seed_load = 0; wave_we = 0; gain_we = 0; gain_wbank = 0;
    wave_addr = '0; gain_waddr = '0; wave_data = '0; gain_wdata = '0;
    for (int i = 0; i < L; i++) din[i] = '0;
    cfg = '0;
    cfg.fg_mode = FG_PASS;
    cfg.probe_src = PROBE_FFT;
    cfg.fg_gain = 16'h1000;
    cfg.fg_clip = 14'h1FFF;
    repeat (4) @(posedge clk);
    rst <= 0;
    // gains: bank 0 = 1 (phase A) and later 2048; bank 1 = 4096
    for (int u = 0; u < FW; u++) begin
      @(posedge clk);
      gain_we <= 1; gain_wbank <= 0; gain_waddr <= 4'(u); gain_wdata <= {NB{16'd1}};
      @(posedge clk);
      gain_we <= 1; gain_wbank <= 1; gain_waddr <= 4'(u); gain_wdata <= {NB{16'd4096}};
      @(posedge clk);
      for (int i = 0; i < L; i++) begin
        int v;
        v = $urandom_range(0, 24);
        wave[u][i] = ADC_W'(v - 12);
      end
      gain_we <= 0;
      wave_we <= 1; wave_addr <= 4'(u);
      for (int i = 0; i < L; i++) wave_data[i*ADC_W +: ADC_W] <= wave[u][i];
    end
    @(posedge clk);
    wave_we <= 0;
    // phase A: tone, 9 frames
    for (int f = 0; f < 24; f++) begin
      if (f == 9) begin
        // phase B: bypass with the waveform, gain bank 1
        phase = 1;
        cfg.fg_mode   <= FG_WAVEFORM;
        cfg.fft_bypass <= 1;
        cfg.gain_bank <= 1;
        cfg.probe_src <= PROBE_SCALER;
      end
      if (f == 8) begin
        // bank 0 becomes 2048 for phase C while bank 1 is about to be used
        fork
          begin
            @(posedge clk);
            for (int u = 0; u < FW; u++) begin
              gain_we <= 1; gain_wbank <= 0; gain_waddr <= 4'(u); gain_wdata <= {NB{16'd2048}};
              @(posedge clk);
            end
            gain_we <= 0;
          end
        join_none
      end
      if (f == 16) begin
        phase = 2;
        cfg.gain_bank <= 0;
      end
      for (int t = 0; t < FW; t++) begin
        sof_in <= (t == 0);
        if (t == 0) begin
          frame_no <= 64'(fcount);
          fno_hist[cyc + 1] = fcount;
          sof_time.push_back(cyc + 1);
          fcount++;
        end
        for (int i = 0; i < L; i++) begin
          int n;
          n = t * L + i;
          din[i] <= ADC_W'($rtoi($floor(500.0 * $cos(2.0 * 3.14159265358979 * K0 * n / N + 0.3) + 0.5)));
        end
        @(posedge clk);
      end
    end
    sof_in <= 0;
    repeat (3 * FW) @(posedge clk);
    $display("tone frames %0d, bypass frames %0d", tone_frames, byp_frames);
    check(tone_frames >= 3, "tone frames checked");
    check(byp_frames >= 8, "bypass frames checked");
    check(stat_checks >= 2, "statistics published");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- output checker ----------------
  int tone_frames = 0, byp_frames = 0;
  int ow = -1;                 // word within output frame
  int oph;                     // phase of the frame being checked
  int nframe = 0;
  int clip_cnt, exp_clip_prev = -1;
  logic [7:0] spec [NB*FW];
  always @(posedge clk) begin
    #0.1;
    if (!rst && q_sof) begin
      longint t0;
      int lat;
      nframe++;
      ow = 0;
      oph = phase;
      // latency and frame number: find the input frame this one came from
      lat = oph == 0 ? LAT_FFT : LAT_BYP;
      t0 = cyc - lat;
      if (fno_hist.exists(t0)) check(q_frame_no == 64'(fno_hist[t0]), $sformatf("q_frame_no %0d exp %0d", q_frame_no, fno_hist[t0]));
      else if (oph == 0 || nframe > 12) check(0, $sformatf("no input frame %0d clocks before q_sof (phase %0d)", lat, oph));
    end
    if (!rst && ow >= 0) begin
      for (int b = 0; b < NB; b++) spec[b * FW + ow] = q[b];
      if (oph != 0 && nframe >= 12) begin
        // bypass checks: skip the frames in flight around the switch
        int ph_exp;
        ph_exp = (oph == 2 && nframe >= 19) ? 2 : (oph == 1 ? 1 : -1);
        if (ph_exp > 0 && nframe != 18) begin
          for (int b = 0; b < NB; b++)
            check(q[b] == exp_byte(ow, b, ph_exp), $sformatf("frame %0d word %0d slot %0d got %h exp %h", nframe, ow, b, q[b], exp_byte(ow, b, ph_exp)));
        end
      end
      ow++;
      if (ow == FW) begin
        ow = -1;
        if (oph == 0 && nframe >= 5 && nframe <= 9) begin
          // spectrum slot b of word u is bin bitrev(u) + FW*b
          tone_frames++;
          for (int u = 0; u < FW; u++) begin
            int br;
            br = 0;
            for (int j = 0; j < NS; j++) br |= ((u >> j) & 1) << (NS - 1 - j);
            for (int b = 0; b < NB; b++) begin
              int k, d;
              k = br + FW * b;
              d = k > K0 ? k - K0 : K0 - k;
              if (k == K0) check(spec[b * FW + u][7:4] == 4'h7 || spec[b * FW + u][7:4] == 4'h9 ||
                                 spec[b * FW + u][3:0] == 4'h7 || spec[b * FW + u][3:0] == 4'h9,
                                 $sformatf("tone bin %0d not clipped: %h", k, spec[b * FW + u]));
              else if (d >= 2) check(spec[b * FW + u] == 8'h00, $sformatf("bin %0d should be 0: %h", k, spec[b * FW + u]));
            end
          end
        end
        if (oph == 1 && nframe >= 12) begin
          byp_frames++;
          clip_cnt = 0;
          for (int u = 0; u < FW; u++)
            for (int b = 0; b < NB; b++) begin
              int re, im;
              re = wave[u][2*b]; im = wave[u][2*b+1];
              if (re > 7 || re < -7 || im > 7 || im < -7) clip_cnt++;
            end
          exp_clip_prev = clip_cnt;
        end else if (oph == 2 && nframe >= 19) begin
          byp_frames++;
        end
      end
    end
  end

  // statistics: with a one-frame period the count published at a strobe is the previous frame's
  int stat_checks = 0;
  always @(posedge clk) begin
    #0.1;
    if (!rst && stats_done && phase == 1 && nframe >= 14 && exp_clip_prev >= 0) begin
      check(stats_count == 32'(exp_clip_prev), $sformatf("stats %0d exp %0d", stats_count, exp_clip_prev));
      stat_checks++;
    end
  end
endmodule
