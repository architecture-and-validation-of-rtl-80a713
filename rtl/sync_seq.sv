// sync_seq: acquisition start sequencer and frame timer of one board.
// Software arms the sequencer; the next rising edge of the time pulse (PPS, IRIG-B derived or a
// pulse distributed on the backplane) selects the following rising edge of the 10 MHz reference,
// and on that edge acquisition (re)starts: the word counter restarts, the frame counter is set
// to frame_no_init and a frame strobe (sof) is issued every FRAME_WORDS clocks from then on.
// Because every board starts on the same reference edge picked by the same pulse, their frame
// numbers and sample boundaries agree across the array.
// Interface: pps and ref10m are single-bit levels already in the sampling clock domain (edge
// detection here; the clock-domain crossing belongs to the board clocking). frame_no is the
// number of the frame whose word 0 is marked by sof and holds through that frame.
// Timing: sof rises 2 clocks after the clock at which the selected ref10m edge is sampled.
// From the paper: armed start on a reference edge selected by a PPS/IRIG-B/backplane pulse, and
// the frame counter since frame 0 used as timestamp. Edge detection and register layout are this
// design's choices.
module sync_seq
  import chfpga_pkg::*;
#(
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        arm,
  input  logic        pps,
  input  logic        ref10m,
  input  logic [63:0] frame_no_init,
  output logic        sof,
  output logic [63:0] frame_no,
  output logic        running,
  output logic        armed
);
  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_WAIT_REF, S_RUN} state_e;
  state_e state;
  logic   pps_q, ref_q, pps_rise, ref_rise, start;
  logic [$clog2(FRAME_WORDS)-1:0] widx;

  assign pps_rise = pps & ~pps_q;
  assign ref_rise = ref10m & ~ref_q;
  assign armed    = (state == S_ARMED) || (state == S_WAIT_REF);
  assign running  = (state == S_RUN);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      pps_q    <= 1'b0;
      ref_q    <= 1'b0;
      start    <= 1'b0;
      sof      <= 1'b0;
      widx     <= '0;
      frame_no <= '0;
    end else begin
      pps_q <= pps;
      ref_q <= ref10m;
      start <= 1'b0;
      unique case (state)
        S_IDLE, S_RUN: if (arm) state <= S_ARMED;
        S_ARMED:       if (pps_rise) state <= S_WAIT_REF;
        S_WAIT_REF:    if (ref_rise) begin
                         state <= S_RUN;
                         start <= 1'b1;
                       end
        default:       state <= S_IDLE;
      endcase
      if (start) begin
        widx     <= '0;
        sof      <= 1'b1;
        frame_no <= frame_no_init;
      end else if (running) begin
        widx <= widx + 1'b1;
        sof  <= (widx == $clog2(FRAME_WORDS)'(FRAME_WORDS - 1));
        if (widx == $clog2(FRAME_WORDS)'(FRAME_WORDS - 1)) frame_no <= frame_no + 1'b1;
      end else begin
        sof <= 1'b0;
      end
    end
  end

  // a running sequencer issues exactly one strobe every FRAME_WORDS clocks
  property p_sof_period;
    @(posedge clk) disable iff (rst || start) (sof && running) |-> ##FRAME_WORDS (sof || !running || start);
  endproperty
  a_sof_period: assert property (p_sof_period);
endmodule
