// tb_upack: streams frames of known (4+4i) bytes from 8 inputs into a reduced UPACK
// (8 words x 4 bins per frame, 16-frame sets, 4 packets of 4 bins), programs a random readout
// table and random header templates, and reads the 512-bit stream with random stalls. Every
// header beat (template, board id, first bin, 64-bit frame number, packet index) and every
// payload byte (frame-major, then input) is compared with values computed here. A long stall
// then forces a set to be dropped, which must show up in the overrun counter while the set
// being read stays intact.
module tb_upack;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = 8, B = 4, FW = 8, NFR = 16, NPKT = 4, BPP = 4;
  logic clk = 0, rst = 1, enable = 0, in_sof = 0, tab_we = 0, hdr_we = 0, tvalid, tready = 0, tlast, busy;
  logic [63:0] in_frame_no = 0;
  logic [7:0] in_q [N][B];
  logic [7:0] board_id = 8'h5C;
  logic [2:0] pkt_count = 3'(NPKT);
  logic [3:0] tab_addr = 0;
  logic [15:0] tab_data = 0;
  logic [5:0] hdr_addr = 0;
  logic [31:0] hdr_data = 0;
  logic [511:0] tdata;
  logic [15:0] sets_done, overruns;
  int checks = 0, failures = 0;
  upack #(.N_IN(N), .BINS(B), .FRAME_WORDS(FW), .NFR(NFR), .NPKT(NPKT), .BPP(BPP)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic logic [7:0] v(int c, int bin, longint fr);
    return 8'(c * 37 + bin * 11 + fr * 101 + (bin >> 3) * 7);
  endfunction
  function automatic int br3(int x);
    return ((x & 1) << 2) | (x & 2) | ((x & 4) >> 2);
  endfunction
  logic [15:0]  table_bins [NPKT*BPP];
  logic [31:0]  tmpl [NPKT*16];
  bit stall = 0;

  // frame source: continuous frames, frame numbers from 500
  longint fcount = 500;
  initial begin
    for (int c = 0; c < N; c++) for (int k = 0; k < B; k++) in_q[c][k] = 0;
    @(negedge rst);
    repeat (200) @(posedge clk);   // tables are written meanwhile
    forever begin
      for (int t = 0; t < FW; t++) begin
        in_sof <= (t == 0);
        in_frame_no <= 64'(fcount);
        for (int c = 0; c < N; c++) for (int k = 0; k < B; k++) in_q[c][k] <= v(c, br3(t) + FW * k, fcount);
        @(posedge clk);
      end
      fcount++;
    end
  end

  initial begin
    int beat, pkt, bi, sets;
    longint ts;
    logic [511:0] e;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < NPKT * BPP; i++) begin
      table_bins[i] = 16'($urandom_range(0, FW * B - 1));
      tab_we <= 1; tab_addr <= 4'(i); tab_data <= table_bins[i];
      @(posedge clk);
    end
    tab_we <= 0;
    for (int i = 0; i < NPKT * 16; i++) begin
      tmpl[i] = $urandom();
      hdr_we <= 1; hdr_addr <= 6'(i); hdr_data <= tmpl[i];
      @(posedge clk);
    end
    hdr_we <= 0;
    enable <= 1;
    sets = 0;
    while (sets < 4) begin
      // wait for the first header beat of a set
      pkt = 0; beat = 0;
      while (pkt < NPKT) begin
        bit r;
        // handshake values are sampled between clock edges; the beat moves at the next edge
        @(negedge clk);
        r = ($urandom_range(0, 3) != 0);
        if (sets == 2 && pkt == 1 && beat == 3 && !stall) begin
          // long stall: the writer completes sets meanwhile and must drop one
          stall = 1;
          tready <= 0;
          repeat (FW * NFR * 2 + 10) @(negedge clk);
        end
        tready <= r;
        #0.1;
        if (tvalid && r) begin
          if (beat == 0) begin
            int fb;
            if (pkt == 0) ts = longint'(dut.rts);
            fb = int'(table_bins[pkt * BPP]);
            for (int i = 0; i < 16; i++) e[i*32 +: 32] = tmpl[pkt * 16 + i];
            e[42*8 +: 8] = board_id;
            e[43*8 +: 8] = 8'(fb >> 8);
            e[44*8 +: 8] = 8'(fb);
            for (int i = 0; i < 8; i++) e[(45+i)*8 +: 8] = 8'(ts >> (8 * (7 - i)));
            e[53*8 +: 8] = 8'(pkt >> 8);
            e[54*8 +: 8] = 8'(pkt);
            checks++;
            if (tdata != e || tlast) begin
              failures++;
              $display("set %0d pkt %0d header mismatch", sets, pkt);
            end
            // the timestamp must be a multiple of the set length from the first frame number
            checks++;
            if ((ts - 500) % NFR != 0) begin failures++; $display("timestamp %0d", ts); end
          end else begin
            int bin, half;
            bi   = (beat - 1) / 2;
            half = (beat - 1) % 2;
            bin  = int'(table_bins[pkt * BPP + bi]);
            e = '0;
            for (int j = 0; j < 64; j++) begin
              int f, c;
              f = (half * 64 + j) / N;
              c = (half * 64 + j) % N;
              e[j*8 +: 8] = v(c, bin, ts + f);
            end
            checks++;
            if (tdata != e || tlast != (bi == BPP - 1 && half == 1)) begin
              failures++;
              if (failures < 3) $display("set %0d pkt %0d bin %0d half %0d mismatch ts %0d\n got %h\n exp %h", sets, pkt, bin, half, ts, tdata, e);
            end
          end
          beat++;
          if (beat == 1 + 2 * BPP) begin
            beat = 0;
            pkt++;
          end
        end
      end
      sets++;
    end
    tready <= 0;
    checks++;
    if (overruns == 0) begin failures++; $display("no overrun seen"); end
    $display("sets %0d overruns %0d", sets_done, overruns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
