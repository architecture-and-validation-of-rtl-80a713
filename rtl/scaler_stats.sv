// scaler_stats: counts scaler clipping events over a programmable number of frames.
// In all-bins mode every clipped bin is counted; in single-bin mode only the bin with frequency
// index bin_sel (DIF word order is undone here: word u, slot k2 holds bin bitrev(u) + FW*k2).
// After period_frames frame strobes the count is published on count and a new period starts.
// Interface: follows the scaler output (sof, ovf flags). Timing: count updates on the strobe
// that ends a period; done pulses for one clock then.
// From the paper: counts post-requantization overflows over programmable periods, one bin or all
// bins, on the monitoring path. Counter widths and the period register are this design's.
module scaler_stats
  import chfpga_pkg::*;
#(
  parameter int unsigned BINS        = BINS_PER_CLK,
  parameter int unsigned FRAME_WORDS = FRAME_LEN / SPC
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         sof_in,
  input  logic [BINS-1:0]              ovf,
  input  logic                         single_bin,
  input  logic [$clog2(FRAME_WORDS*BINS)-1:0] bin_sel,
  input  logic [15:0]                  period_frames,
  output logic [31:0]                  count,
  output logic                         done
);
  localparam int AW = $clog2(FRAME_WORDS);
  logic [AW-1:0] widx, cur, k1;
  logic [31:0]   acc;
  logic [15:0]   nfr;
  logic [$clog2(BINS+1)-1:0] n;
  assign cur = sof_in ? '0 : widx + 1'b1;
  always_comb for (int i = 0; i < AW; i++) k1[i] = cur[AW-1-i];

  always_comb begin
    n = '0;
    for (int b = 0; b < BINS; b++)
      if (ovf[b] && (!single_bin || (bin_sel == {b[$clog2(BINS)-1:0], k1}))) n = n + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      widx  <= '1;
      acc   <= '0;
      nfr   <= '0;
      count <= '0;
      done  <= 1'b0;
    end else begin
      widx <= cur;
      done <= 1'b0;
      if (sof_in && nfr + 1'b1 >= period_frames) begin
        count <= acc;
        done  <= 1'b1;
        acc   <= 32'(n);
        nfr   <= '0;
      end else begin
        if (sof_in) nfr <= nfr + 1'b1;
        if (acc != '1) acc <= acc + 32'(n);
      end
    end
  end
endmodule
