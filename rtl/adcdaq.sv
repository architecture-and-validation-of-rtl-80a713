// adcdaq: acquisition front end for one RF-ADC input.
// Each 400 MHz clock it takes the eight 14-bit samples delivered by the converter, registers them
// and aligns them with the frame strobe from the sync sequencer (sof marks sample 0 of a frame).
// It counts samples that reach the converter's full-scale codes (or are flagged over-range by the
// converter) in every frame, publishes the count of the last complete frame and keeps a sticky
// overflow flag that software clears with ovf_clear.
// Timing: one clock of latency for data and sof; ovf_frame_count updates on the sof that ends a frame.
// The paper gives the function (acquire, monitor and reset ADC overflow flags); the full-scale
// detection, the per-frame count and the register layout are this design's choices.
module adcdaq
  import chfpga_pkg::*;
#(
  parameter int unsigned LANES = SPC,
  parameter int unsigned W     = ADC_W
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       sof_in,
  input  logic signed [W-1:0]        adc_data [LANES],
  input  logic                       adc_ovr,     // over-range flag from the converter
  input  logic                       ovf_clear,
  output logic signed [W-1:0]        data_out [LANES],
  output logic                       sof_out,
  output logic [15:0]                ovf_frame_count,
  output logic                       ovf_sticky
);
  localparam logic signed [W-1:0] FS_POS = {1'b0, {(W-1){1'b1}}};
  localparam logic signed [W-1:0] FS_NEG = {1'b1, {(W-1){1'b0}}};

  logic [$clog2(LANES+1)-1:0] n_ovf;
  logic [15:0]                acc;

  always_comb begin
    n_ovf = '0;
    for (int i = 0; i < LANES; i++)
      if (adc_data[i] == FS_POS || adc_data[i] == FS_NEG) n_ovf = n_ovf + 1'b1;
    if (adc_ovr && n_ovf == '0) n_ovf = 1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sof_out         <= 1'b0;
      acc             <= '0;
      ovf_frame_count <= '0;
      ovf_sticky      <= 1'b0;
      for (int i = 0; i < LANES; i++) data_out[i] <= '0;
    end else begin
      sof_out <= sof_in;
      for (int i = 0; i < LANES; i++) data_out[i] <= adc_data[i];
      if (sof_in) begin
        ovf_frame_count <= acc;
        acc             <= 16'(n_ovf);
      end else if (acc <= 16'hFFFF - 16'(LANES)) begin
        acc <= acc + 16'(n_ovf);
      end
      if (ovf_clear)          ovf_sticky <= 1'b0;
      else if (n_ovf != '0)   ovf_sticky <= 1'b1;
    end
  end
endmodule
