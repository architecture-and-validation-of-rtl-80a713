// ucap: global burst capture engine.
// Every period_frames frames it captures a burst of SLOTS (16) frames from the channel probes
// into its buffer and then streams them out slowly, 32 bits at a time, for the 1 GbE link,
// while the science path keeps running. n_log2 picks how the 16 frame slots are shared:
// 2^n_log2 inputs (starting at first_input, which should be a multiple of 2^n_log2) each get
// 16 >> n_log2 contiguous frames, captured at the same time (n_log2 = 0: one input x 16 frames;
// n_log2 = 3: eight inputs x 2 frames). The buffer is 8 banks of two frame slots, so each input
// of a burst writes its own banks and all of them are written in parallel.
// Readout order: slot 0..15 (slot = input rank * frames per input + frame rank), words 0..FRAME_WORDS-1,
// 32-bit lanes 0..3 of each 128-bit word. out_first marks the burst's first lane, out_last each
// slot's last lane; out_slot/out_odd say which slot and FFT half a lane belongs to.
// A period that ends while the previous burst is still being read out is skipped and counted.
// Interface: probe words with frame strobes in; valid/ready stream out (data held while stalled).
// From the paper: 16 frames per burst, 1 input x 16 frames to 8 inputs x 2 frames and the
// combinations between, programmable capture rate, slow readout in parallel with science data.
// Buffer organisation, stream format and skip policy are this design's choices.
module ucap
  import chfpga_pkg::*;
#(
  parameter int unsigned N_IN        = N_INPUTS,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC,
  parameter int unsigned SLOTS       = 16,
  parameter int unsigned DW          = 128
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [DW-1:0]             probe_data [N_IN],
  input  logic [N_IN-1:0]           probe_sof,
  input  logic [N_IN-1:0]           probe_odd,
  input  logic                      enable,
  input  logic [31:0]               period_frames,
  input  logic [1:0]                n_log2,
  input  logic [$clog2(N_IN)-1:0]   first_input,
  output logic [31:0]               out_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic                      out_first,
  output logic                      out_last,
  output logic [$clog2(SLOTS)-1:0]  out_slot,
  output logic                      out_odd,
  output logic [15:0]               bursts,
  output logic [15:0]               skipped
);
  localparam int BANKS = SLOTS / 2;
  localparam int AW    = $clog2(FRAME_WORDS);
  localparam int SW    = $clog2(SLOTS);
  localparam int LN    = DW / 32;

  logic [DW-1:0] mem [BANKS][2*FRAME_WORDS];
  logic          slot_odd [SLOTS];

  typedef enum logic [1:0] {U_WAIT, U_CAPTURE, U_READ} ustate_e;
  ustate_e state;

  logic                  sof;
  logic [AW-1:0]         widx, wcur;
  logic [31:0]           pcnt;
  logic [SW-1:0]         frank;     // frame rank within the burst
  logic [SW:0]           fper;      // frames per input
  assign sof  = probe_sof[first_input];
  assign wcur = sof ? '0 : widx + 1'b1;
  assign fper = (SW+1)'(SLOTS >> n_log2);

  // a burst starts on the frame strobe that ends a period
  logic          start, cap_en;
  logic [SW-1:0] cap_frank;
  assign start     = (state == U_WAIT) && enable && sof && pcnt == '0;
  assign cap_en    = start || (state == U_CAPTURE);
  assign cap_frank = start ? '0 : frank;

  // ---------------- capture ----------------
  always_ff @(posedge clk) begin
    if (cap_en) begin
      for (int r = 0; r < N_IN; r++) begin
        if (r < (1 << n_log2)) begin
          int unsigned slot;
          slot = r * int'(fper) + int'(cap_frank);
          mem[slot / 2][{slot[0], wcur}] <= probe_data[(int'(first_input) + r) % N_IN];
          if (sof) slot_odd[slot] <= probe_odd[(int'(first_input) + r) % N_IN];
        end
      end
    end
  end

  // ---------------- readout pointers ----------------
  logic [SW-1:0]          rslot;
  logic [AW-1:0]          rword;
  logic [$clog2(LN)-1:0]  rlane;
  logic                   r_end_slot, r_end_all;
  assign r_end_slot = (rword == AW'(FRAME_WORDS - 1)) && (rlane == '1);
  assign r_end_all  = r_end_slot && (rslot == SW'(SLOTS - 1));

  always_comb begin
    logic [DW-1:0] w;
    w         = mem[rslot / 2][{rslot[0], rword}];
    out_data  = w[rlane*32 +: 32];
    out_valid = (state == U_READ);
    out_first = (state == U_READ) && rslot == '0 && rword == '0 && rlane == '0;
    out_last  = (state == U_READ) && r_end_slot;
    out_slot  = rslot;
    out_odd   = slot_odd[rslot];
  end

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= U_WAIT;
      widx    <= '1;
      pcnt    <= '0;
      frank   <= '0;
      rslot   <= '0;
      rword   <= '0;
      rlane   <= '0;
      bursts  <= '0;
      skipped <= '0;
    end else begin
      widx <= wcur;
      // period counter runs on frame strobes whenever enabled
      if (!enable)  pcnt <= '0;
      else if (sof) pcnt <= (pcnt + 1 >= period_frames) ? '0 : pcnt + 1;
      unique case (state)
        U_WAIT: if (start) begin
                  state <= U_CAPTURE;
                  frank <= '0;
                end
        U_CAPTURE: if (wcur == AW'(FRAME_WORDS - 1)) begin
                     if (32'(frank) == 32'(fper) - 1) begin
                       state  <= U_READ;
                       rslot  <= '0;
                       rword  <= '0;
                       rlane  <= '0;
                       bursts <= bursts + 1'b1;
                     end else begin
                       frank <= frank + 1'b1;
                     end
                   end
        U_READ: if (out_ready) begin
                  rlane <= rlane + 1'b1;
                  if (rlane == '1) begin
                    rword <= rword + 1'b1;
                    if (rword == AW'(FRAME_WORDS - 1)) rslot <= rslot + 1'b1;
                  end
                  if (r_end_all) state <= U_WAIT;
                end
        default: state <= U_WAIT;
      endcase
      if (state == U_READ && enable && sof && pcnt == '0 && !skipped[15]) skipped <= skipped + 1'b1;
    end
  end

  // stream rule: once offered, a lane stays offered until it is taken
  a_hold: assert property (@(posedge clk) disable iff (rst)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_data) && $stable(out_slot)));
endmodule
