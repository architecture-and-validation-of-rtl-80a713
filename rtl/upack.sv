// upack: packet assembler of the CHORD firmware (feeds the 100 GbE MAC).
// Writing: NFR (16) consecutive frames of all N_IN (8) inputs' (4+4i) bins are stored in one of
// two buffers. The word of DIF index t (the clock of the frame that carried it) holds, for every
// frame f and input c, the BINS bytes of that clock: byte (f*N_IN + c)*BINS + k2 of word t is bin
// bitrev(t) + FRAME_WORDS*k2 of input c in frame f. When a set of 16 frames is complete it is
// handed to the reader and the writer fills the other buffer.
// Reading: for packet p (0..pkt_count-1) the header beat is sent, then the BPP (48) bins listed in
// entries p*BPP .. p*BPP+BPP-1 of the readout table, two 512-bit beats per bin: 16 frames x 8
// inputs = 128 bytes, byte j = frame*8 + input, frames 0-7 in the first beat. Byte 0 is bits 7:0.
// (Other NFR x N_IN sizes use as many beats as the bytes need, the last one zero-padded.)
// The header beat is the programmable template of slot p (Ethernet/IP/UDP, bytes 0..41 and the
// rest) with bytes 42..54 replaced: 42 board id, 43-44 first bin of the packet, 45-52 frame
// number of the set's first frame, 53-54 packet index (multi-byte fields big-endian).
// If a set completes while the previous one is still being read, the new set is dropped and
// overruns counts it. Output: 512-bit valid/ready stream with tlast, every beat full.
// From the paper: 16 frames x 8192 bins x 8 inputs per set, double buffering, bin-by-bin readout
// of 16 frames driven by a programmable table, programmable headers with board id, bin ids and a
// 64-bit frame-number timestamp; CHORD uses 128 packets of 48 bins. The paper keeps headers in
// buffer locations freed by untransmitted bins; here they sit in a separate template memory.
// Byte layouts, the drop policy and the stream format are this design's choices.
module upack
  import chfpga_pkg::*;
#(
  parameter int unsigned N_IN        = N_INPUTS,
  parameter int unsigned BINS        = BINS_PER_CLK,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC,
  parameter int unsigned NFR         = 16,
  parameter int unsigned NPKT        = 128,
  parameter int unsigned BPP         = 48
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       enable,
  input  logic                       in_sof,
  input  logic [63:0]                in_frame_no,
  input  logic [7:0]                 in_q [N_IN][BINS],
  input  logic [7:0]                 board_id,
  input  logic [$clog2(NPKT+1)-1:0]  pkt_count,
  // table writes
  input  logic                       tab_we,
  input  logic [$clog2(NPKT*BPP)-1:0] tab_addr,
  input  logic [15:0]                tab_data,
  input  logic                       hdr_we,
  input  logic [$clog2(NPKT*16)-1:0] hdr_addr,     // {slot, 32-bit lane}
  input  logic [31:0]                hdr_data,
  // 100 GbE stream
  output logic [511:0]               tdata,
  output logic                       tvalid,
  input  logic                       tready,
  output logic                       tlast,
  output logic [15:0]                sets_done,
  output logic [15:0]                overruns,
  output logic                       busy
);
  localparam int AW   = $clog2(FRAME_WORDS);
  localparam int SLW  = N_IN * BINS * 8;           // bits per frame per word
  localparam int FRW  = $clog2(NFR);
  localparam int PKW  = $clog2(NPKT + 1);
  localparam int BIW  = $clog2(BPP);
  localparam int TBW  = $clog2(NPKT * BPP);
  localparam int BYTES_PER_BIN = NFR * N_IN;
  localparam int BPB  = (BYTES_PER_BIN * 8 + 511) / 512;   // beats per bin (2 for 16 x 8 bytes)
  localparam int BSW  = (BPB > 1) ? $clog2(BPB) : 1;

  logic [NFR-1:0][SLW-1:0] mem [2][FRAME_WORDS];
  logic [15:0]             rdtab [NPKT*BPP];
  logic [31:0]             hdr   [NPKT*16];

  always_ff @(posedge clk) begin
    if (tab_we) rdtab[tab_addr] <= tab_data;
    if (hdr_we) hdr[hdr_addr]   <= hdr_data;
  end

  // ---------------- writer ----------------
  logic          wb, wr_active, handoff;
  logic [FRW-1:0] frank;
  logic [AW-1:0] widx, wcur;
  logic [63:0]   wts;           // frame number of the set being written
  logic          rd_busy;
  logic          rb;
  logic [63:0]   rts;
  logic          set_end;
  assign wcur    = in_sof ? '0 : widx + 1'b1;
  assign set_end = wr_active && frank == FRW'(NFR - 1) && wcur == AW'(FRAME_WORDS - 1);
  assign handoff = set_end && !rd_busy;

  logic [SLW-1:0] in_word;
  always_comb
    for (int c = 0; c < N_IN; c++)
      for (int k = 0; k < BINS; k++) in_word[(c*BINS + k)*8 +: 8] = in_q[c][k];

  always_ff @(posedge clk)
    if (wr_active || (enable && in_sof)) mem[wb][wcur][(wr_active && !in_sof) ? frank : (wr_active ? frank + 1'b1 : '0)] <= in_word;

  always_ff @(posedge clk) begin
    if (rst) begin
      wb        <= 1'b0;
      wr_active <= 1'b0;
      frank     <= '0;
      widx      <= '1;
      wts       <= '0;
      overruns  <= '0;
      sets_done <= '0;
    end else begin
      widx <= wcur;
      if (!wr_active) begin
        if (enable && in_sof) begin
          wr_active <= 1'b1;
          frank     <= '0;
          wts       <= in_frame_no;
        end
      end else if (in_sof) begin
        frank <= frank + 1'b1;        // wraps to 0 after the set's last frame
        if (frank == FRW'(NFR - 1)) begin
          wts <= in_frame_no;
          if (!enable) wr_active <= 1'b0;
        end
      end
      if (set_end) begin
        if (handoff) begin
          wb        <= ~wb;
          sets_done <= sets_done + 1'b1;
        end else if (overruns != '1) begin
          overruns <= overruns + 1'b1;
        end
      end
    end
  end

  // ---------------- reader ----------------
  typedef enum logic [1:0] {R_IDLE, R_HDR, R_DATA} rstate_e;
  rstate_e        rstate;
  logic [PKW-1:0] pkt;
  logic [BIW-1:0] bi;
  logic [BSW-1:0] bsub;
  logic [TBW-1:0] tab_idx;
  logic [12:0]    bin, first_bin;
  logic [AW-1:0]  t_addr;
  logic [1:0]     k2;
  assign rd_busy = (rstate != R_IDLE);
  assign busy    = rd_busy;
  assign tab_idx = TBW'(pkt * BPP + bi);
  assign bin     = rdtab[tab_idx][12:0];
  assign first_bin = rdtab[TBW'(pkt * BPP)][12:0];
  assign k2      = 2'(bin >> AW);
  always_comb for (int i = 0; i < AW; i++) t_addr[i] = bin[AW-1-i];

  always_comb begin
    logic [NFR-1:0][SLW-1:0] w;
    logic [512*BPB-1:0] bytes;
    logic [511:0] h;
    w = mem[rb][t_addr];
    bytes = '0;
    for (int f = 0; f < NFR; f++)
      for (int c = 0; c < N_IN; c++)
        bytes[(f*N_IN + c)*8 +: 8] = w[f][(c*BINS + int'(k2))*8 +: 8];
    for (int i = 0; i < 16; i++) h[i*32 +: 32] = hdr[{pkt[PKW-2:0], 4'(i)}];
    h[42*8 +: 8] = board_id;
    h[43*8 +: 8] = 8'(first_bin >> 8);
    h[44*8 +: 8] = first_bin[7:0];
    for (int i = 0; i < 8; i++) h[(45+i)*8 +: 8] = rts[(7-i)*8 +: 8];
    h[53*8 +: 8] = 8'(16'(pkt) >> 8);
    h[54*8 +: 8] = 8'(pkt);
    tvalid = rd_busy;
    tlast  = (rstate == R_DATA) && bsub == BSW'(BPB - 1) && bi == BIW'(BPP - 1);
    if (rstate == R_HDR) tdata = h;
    else                 tdata = bytes[bsub*512 +: 512];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rstate <= R_IDLE;
      rb     <= 1'b0;
      rts    <= '0;
      pkt    <= '0;
      bi     <= '0;
      bsub   <= '0;
    end else begin
      unique case (rstate)
        R_IDLE: if (handoff && pkt_count != '0) begin
                  rstate <= R_HDR;
                  rb     <= wb;
                  rts    <= wts;
                  pkt    <= '0;
                end
        R_HDR:  if (tready) begin
                  rstate <= R_DATA;
                  bi     <= '0;
                  bsub   <= '0;
                end
        R_DATA: if (tready) begin
                  bsub <= (bsub == BSW'(BPB - 1)) ? '0 : bsub + 1'b1;
                  if (bsub == BSW'(BPB - 1)) begin
                    bi <= bi + 1'b1;
                    if (bi == BIW'(BPP - 1)) begin
                      pkt    <= pkt + 1'b1;
                      rstate <= (pkt + 1'b1 == pkt_count) ? R_IDLE : R_HDR;
                    end
                  end
                end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
    (tvalid && !tready) |=> (tvalid && $stable(tdata) && $stable(tlast)));
endmodule
