// ucorr: single-board N^2 correlator (X-engine) for the corner-turned (4+4i) scaler bytes.
// For every frequency bin it forms all N_IN*(N_IN+1)/2 products V_ij = x_i * conj(x_j), i <= j
// (36 for eight inputs, autocorrelations included), and adds them over int_frames consecutive
// frames into (ACC_W + ACC_W i)-bit accumulators that saturate at +/-(2^(ACC_W-1) - 1).
// The accumulators are double buffered: while one bank integrates, the other is streamed out
// (one product per beat, valid/ready) as {re, im}, bin by bin in the order the bins arrive
// (word t, slot k2: bin bitrev(t) + FRAME_WORDS*k2) and products p = 0..NP-1 within a bin
// (p runs over (0,0),(0,1)..(0,N-1),(1,1),..). An integration that ends while the previous one
// is still being read out is dropped and counted, and its bank is reused.
// A new integration starts at the first frame strobe after enable; the first frame of each
// integration overwrites the bank instead of adding to it, so no clearing pass is needed.
// Timing: the last frame of an integration is in the bank at the clock after its last word;
// readout starts the following clock. A dump takes FRAME_WORDS*BINS*NP beats.
// From the paper: N = 8, all visibility products in real time, (18+18i)-bit integrated values,
// up to 65,536 frames, integration in on-chip RAM with slow readout during the next
// integration. The product order, the saturation, the drop policy and the stream format are
// this design's choices; the paper's 2-DSP multiplier kernel is replaced by plain products.
module ucorr
  import chfpga_pkg::*;
#(
  parameter int unsigned N_IN        = N_INPUTS,
  parameter int unsigned BINS        = BINS_PER_CLK,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC,
  parameter int unsigned ACC_W       = 18
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       enable,
  input  logic [16:0]                int_frames,   // frames per integration, 1..65536
  input  logic                       in_sof,
  input  logic [63:0]                in_frame_no,
  input  logic [7:0]                 in_q [N_IN][BINS],
  output logic [2*ACC_W-1:0]         out_data,     // {re, im}
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic                       out_first,    // first product of a dump
  output logic                       out_last,     // last product of a dump
  output logic [$clog2(FRAME_WORDS*BINS)-1:0] out_bin,
  output logic [$clog2(N_IN*(N_IN+1)/2)-1:0]  out_prod,
  output logic [63:0]                out_frame_no, // number of the dump's first frame
  output logic [15:0]                dumps,
  output logic [15:0]                dropped
);
  localparam int NP  = N_IN * (N_IN + 1) / 2;
  localparam int AW  = $clog2(FRAME_WORDS);
  localparam int BW  = (BINS > 1) ? $clog2(BINS) : 1;
  localparam int PW  = $clog2(NP);
  localparam logic signed [ACC_W-1:0] AMAX = ACC_W'((1 << (ACC_W - 1)) - 1);

  typedef logic [2*ACC_W-1:0] cval_t;
  cval_t mem [2][FRAME_WORDS][BINS][NP];

  // product index -> input pair
  function automatic int pi_of(input int p);
    int q;
    q = p;
    for (int i = 0; i < N_IN; i++) begin
      if (q < N_IN - i) return i;
      q -= N_IN - i;
    end
    return 0;
  endfunction
  function automatic int pj_of(input int p);
    int q;
    q = p;
    for (int i = 0; i < N_IN; i++) begin
      if (q < N_IN - i) return i + q;
      q -= N_IN - i;
    end
    return 0;
  endfunction

  function automatic logic signed [ACC_W-1:0] sat_add(input logic signed [ACC_W-1:0] a,
                                                      input logic signed [8:0] b);
    logic signed [ACC_W:0] s;
    s = ACC_W'(a) + (ACC_W+1)'(b);
    if (s > (ACC_W+1)'(AMAX))  return AMAX;
    if (s < -(ACC_W+1)'(AMAX)) return -AMAX;
    return ACC_W'(s);
  endfunction

  // ---------------- integration ----------------
  logic          wb;            // bank being integrated
  logic          active, first;
  logic [16:0]   fcnt;          // frames of the current integration started so far
  logic [AW-1:0] widx, wcur;
  logic          frame_end, int_end;
  logic [63:0]   fno_start, fno_done;
  logic          dump_req;
  assign wcur      = in_sof ? '0 : widx + 1'b1;
  assign frame_end = active && wcur == AW'(FRAME_WORDS - 1);
  assign int_end   = frame_end && fcnt == int_frames;

  logic rbusy;
  always_ff @(posedge clk) begin
    if (rst) begin
      widx      <= '1;
      active    <= 1'b0;
      first     <= 1'b1;
      fcnt      <= '0;
      wb        <= 1'b0;
      dump_req  <= 1'b0;
      dropped   <= '0;
      fno_start <= '0;
      fno_done  <= '0;
    end else begin
      widx     <= wcur;
      dump_req <= 1'b0;
      if (!enable) begin
        active <= 1'b0;
      end else if (in_sof) begin
        active <= 1'b1;
        if (!active || fcnt == '0) begin
          fno_start <= in_frame_no;
          fcnt      <= 17'd1;
          first     <= 1'b1;
        end else begin
          fcnt  <= fcnt + 1'b1;
          first <= 1'b0;
        end
      end
      if (int_end) begin
        fcnt <= '0;
        if (rbusy) begin
          dropped <= dropped + 1'b1;
        end else begin
          wb       <= ~wb;
          dump_req <= 1'b1;
          fno_done <= fno_start;
        end
      end
    end
  end

  // read-modify-write of the word's accumulators; the strobe word itself starts a frame
  logic first_cur;
  assign first_cur = in_sof ? (!active || fcnt == '0) : first;
  always_ff @(posedge clk) begin
    if (enable && (active || in_sof)) begin
      for (int k = 0; k < BINS; k++) begin
        for (int p = 0; p < NP; p++) begin
          logic signed [3:0] ar, ai, br, bi;
          logic signed [8:0] pr, pim;
          logic signed [ACC_W-1:0] cr, ci;
          ar  = in_q[pi_of(p)][k][7:4];
          ai  = in_q[pi_of(p)][k][3:0];
          br  = in_q[pj_of(p)][k][7:4];
          bi  = in_q[pj_of(p)][k][3:0];
          // a * conj(b)
          pr  = 9'(ar) * 9'(br) + 9'(ai) * 9'(bi);
          pim = 9'(ai) * 9'(br) - 9'(ar) * 9'(bi);
          cr  = first_cur ? '0 : mem[wb][wcur][k][p][2*ACC_W-1:ACC_W];
          ci  = first_cur ? '0 : mem[wb][wcur][k][p][ACC_W-1:0];
          mem[wb][wcur][k][p] <= {sat_add(cr, pr), sat_add(ci, pim)};
        end
      end
    end
  end

  // ---------------- readout ----------------
  logic [AW-1:0] rword;
  logic [BW-1:0] rslot;
  logic [PW-1:0] rprod;
  logic          r_end;
  assign r_end = rword == AW'(FRAME_WORDS - 1) && rslot == BW'(BINS - 1) && rprod == PW'(NP - 1);

  always_comb begin
    out_valid    = rbusy;
    out_data     = mem[~wb][rword][rslot][rprod];
    out_first    = rbusy && rword == '0 && rslot == '0 && rprod == '0;
    out_last     = rbusy && r_end;
    out_bin      = (BINS > 1) ? {rword, rslot} : $bits(out_bin)'(rword);
    out_prod     = rprod;
    out_frame_no = fno_done;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rbusy <= 1'b0;
      rword <= '0;
      rslot <= '0;
      rprod <= '0;
      dumps <= '0;
    end else begin
      if (dump_req) begin
        rbusy <= 1'b1;
        rword <= '0;
        rslot <= '0;
        rprod <= '0;
      end else if (rbusy && out_ready) begin
        if (r_end) begin
          rbusy <= 1'b0;
          dumps <= dumps + 1'b1;
        end else if (rprod == PW'(NP - 1)) begin
          rprod <= '0;
          if (rslot == BW'(BINS - 1)) begin
            rslot <= '0;
            rword <= rword + 1'b1;
          end else begin
            rslot <= rslot + 1'b1;
          end
        end else begin
          rprod <= rprod + 1'b1;
        end
      end
    end
  end

  // a stalled beat keeps its data
  a_hold: assert property (@(posedge clk) disable iff (rst)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
