// scaler: post-FFT re-quantization of one channel to (4+4i) bits.
// Every FFT bin has its own unsigned GAIN_W-bit digital gain. The (32+32i) bin is multiplied by
// it, giving a (48+48i) product; the 4-bit window whose LSB is bit QUANT_LSB is kept, rounded
// half away from zero and clipped to -7..+7, so the code -8 is never produced and the output is
// not biased negative. Clipping is reported per bin on ovf for the statistics counter.
// Gains sit in two banks (GAIN_BANKS x FRAME_WORDS words of BINS gains); the bank used by the
// datapath is taken from bank_sel at each frame strobe, so a switch never splits a frame.
// Output byte per bin: {re[3:0], im[3:0]}, two's complement.
// Interface: streaming with sof; gain write port (bank, word, BINS x GAIN_W bits).
// Timing: two clocks of latency.
// From the paper: per-bin gain, 48-bit product, (4+4i) result clipped to +/-7, two gain sets.
// The gain width (16 = 48 - 32), the window position QUANT_LSB and the rounding mode are this
// design's choices: the paper says only that the upper bits are kept.
module scaler
  import chfpga_pkg::*;
#(
  parameter int unsigned BINS        = BINS_PER_CLK,
  parameter int unsigned IN_W        = FFT_OUT_W,
  parameter int unsigned GW          = GAIN_W,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC,
  parameter int unsigned GAIN_BANKS  = 2,
  parameter int unsigned QUANT_LSB   = 32
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        sof_in,
  input  logic signed [IN_W-1:0]      in_re [BINS],
  input  logic signed [IN_W-1:0]      in_im [BINS],
  input  logic                        bank_sel,
  input  logic                        gain_we,
  input  logic                        gain_wbank,
  input  logic [$clog2(FRAME_WORDS)-1:0] gain_waddr,
  input  logic [BINS*GW-1:0]          gain_wdata,
  output logic                        sof_out,
  output logic [7:0]                  q [BINS],
  output logic [BINS-1:0]             ovf,
  output logic signed [IN_W+GW-1:0]   prod_re [BINS],   // (48+48i) product, for capture/debug
  output logic signed [IN_W+GW-1:0]   prod_im [BINS]
);
  localparam int AW = $clog2(FRAME_WORDS);
  localparam int PW = IN_W + GW;

  logic [BINS*GW-1:0] gains [GAIN_BANKS][FRAME_WORDS];
  always_ff @(posedge clk)
    if (gain_we) gains[gain_wbank][gain_waddr] <= gain_wdata;

  logic [AW-1:0] widx, cur;
  logic          bank, bank_cur, sof1;
  assign cur      = sof_in ? '0 : widx + 1'b1;
  assign bank_cur = sof_in ? bank_sel : bank;

  always_ff @(posedge clk) begin
    if (rst) begin
      widx <= '1;
      bank <= 1'b0;
      sof1 <= 1'b0;
      for (int b = 0; b < BINS; b++) begin
        prod_re[b] <= '0;
        prod_im[b] <= '0;
      end
    end else begin
      widx <= cur;
      bank <= bank_cur;
      sof1 <= sof_in;
      for (int b = 0; b < BINS; b++) begin
        logic signed [GW:0] g;
        g = $signed({1'b0, gains[bank_cur][cur][b*GW +: GW]});
        prod_re[b] <= PW'(in_re[b] * g);
        prod_im[b] <= PW'(in_im[b] * g);
      end
    end
  end

  function automatic logic [4:0] quant(input logic signed [PW-1:0] v);
    // returns {clipped, value[3:0]}
    logic signed [PW-1:0] mag, r;
    logic neg;
    neg = v[PW-1];
    mag = neg ? -v : v;
    r   = (mag + (PW'(1) <<< (QUANT_LSB - 1))) >>> QUANT_LSB;
    if (r > 7) return {1'b1, neg ? 4'h9 : 4'h7};
    return {1'b0, neg ? 4'(-r) : 4'(r)};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      sof_out <= 1'b0;
      ovf     <= '0;
      for (int b = 0; b < BINS; b++) q[b] <= '0;
    end else begin
      sof_out <= sof1;
      for (int b = 0; b < BINS; b++) begin
        logic [4:0] qr, qi;
        qr = quant(prod_re[b]);
        qi = quant(prod_im[b]);
        q[b]   <= {qr[3:0], qi[3:0]};
        ovf[b] <= qr[4] | qi[4];
      end
    end
  end
endmodule
