// tb_funcgen: runs the function generator through every mode (pass-through, scale/clip,
// waveform replay, PRN, simulated overflow, sample number, frame number) and compares each
// output word with a reference computed here, two clocks after the input word, and checks that
// every mode was exercised.
module tb_funcgen;
  timeunit 1ns; timeprecision 100ps;
  import chfpga_pkg::*;
  localparam int L = 8, W = 14, FW = 16;
  logic clk = 0, rst = 1, sof_in = 0, seed_load = 0, wave_we = 0, sof_out;
  logic signed [W-1:0] din [L], dout [L];
  logic [63:0] frame_no = 0;
  longint fexp = 0;
  fg_mode_e mode = FG_PASS;
  logic [15:0] gain = 16'h1000, ovf_frame_count;
  logic [W-1:0] clip = 14'd8191;
  logic [31:0] seed = 0;
  logic [L-1:0] ovf_lanes = 0;
  logic [$clog2(FW)-1:0] wave_addr = 0;
  logic [L*W-1:0] wave_data = 0;
  int checks = 0, failures = 0;
  funcgen #(.LANES(L), .W(W), .FRAME_WORDS(FW)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct packed { logic dc; logic [L*W-1:0] v; } exp_t;
  exp_t expq [$];
  logic [L*W-1:0] wave [FW];
  logic [31:0] prn [L];
  int fs_count, mode_checks [7];

  function automatic logic [31:0] xs(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return x;
  endfunction

  // one frame of input in the current mode, building the expected words
  task automatic run_frame(input int nfr);
    for (int f = 0; f < nfr; f++) begin
      for (int t = 0; t < FW; t++) begin
        logic [L*W-1:0] e;
        sof_in <= (t == 0);
        for (int i = 0; i < L; i++) begin
          logic signed [W-1:0] x;
          longint p;
          x = W'($urandom_range(0, 16383));
          din[i] <= x;
          case (mode)
            FG_PASS:      e[i*W +: W] = x;
            FG_SCALE: begin
              p = (longint'(x) * longint'(gain)) >>> 12;
              e[i*W +: W] = (p > longint'(clip)) ? W'(clip) : (p < -longint'(clip)) ? W'(-clip) : W'(p);
            end
            FG_WAVEFORM:  e[i*W +: W] = wave[t][i*W +: W];
            FG_PRN: begin
              e[i*W +: W] = prn[i][W-1:0];
              prn[i] = xs(prn[i]);
            end
            FG_OVF:       e[i*W +: W] = ovf_lanes[i] ? 14'h1FFF : x;
            FG_SAMPLE_NO: e[i*W +: W] = W'(t * L + i);
            default:      e[i*W +: W] = W'(fexp);
          endcase
        end
        expq.push_back('{1'b0, e});
        @(posedge clk);
      end
      frame_no <= frame_no + 1;
      fexp++;
    end
    // idle words (not compared) so that a mode change never meets words in flight
    sof_in <= 0;
    repeat (3) begin
      expq.push_back('{1'b1, '0});
      @(posedge clk);
    end
  endtask

  // scoreboard: output word n is input word n delayed by two clocks
  int started = 0;
  always @(posedge clk) begin
    #0.1;
    if (!rst && sof_out) started = 1;
    if (started && expq.size() > 0) begin
      exp_t e;
      e = expq.pop_front();
      for (int i = 0; i < L && !e.dc; i++) begin
        checks++;
        mode_checks[int'(mode)]++;
        if (dout[i] !== e.v[i*W +: W]) begin
          failures++;
          if (failures < 4) $display("mode %s lane %0d got %0d exp %h t=%0t", mode.name(), i, dout[i], e.v, $time);
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < L; i++) din[i] = '0;
    for (int a = 0; a < FW; a++) wave[a] = {$urandom(), $urandom(), $urandom(), $urandom()};
    repeat (3) @(posedge clk);
    rst <= 0;
    // waveform memory
    for (int a = 0; a < FW; a++) begin
      wave_we <= 1; wave_addr <= 4'(a); wave_data <= wave[a];
      @(posedge clk);
    end
    wave_we <= 0;
    repeat (2) @(posedge clk);
    mode = FG_PASS;      run_frame(2);
    mode = FG_SCALE; gain = 16'h2800; clip = 14'd5000; run_frame(2);
    mode = FG_WAVEFORM;  run_frame(2);
    // PRN: load the seed on one clock (its output word is not compared), then free-run
    seed = 32'hC0FFEE11;
    mode = FG_PRN;
    seed_load <= 1;
    sof_in <= 0;
    expq.push_back('{1'b1, '0});
    @(posedge clk);
    seed_load <= 0;
    for (int i = 0; i < L; i++) prn[i] = (seed ^ (32'h9E3779B9 * (i + 1))) | 32'h1;
    run_frame(2);
    mode = FG_OVF; ovf_lanes = 8'b1010_0001; run_frame(2);
    mode = FG_SAMPLE_NO; run_frame(1);
    mode = FG_FRAME_NO;  run_frame(2);
    repeat (4) @(posedge clk);
    // count of full-scale samples: in FG_OVF mode three lanes x FW words per frame
    for (int k = 0; k < 7; k++) begin
      checks++;
      if (mode_checks[k] == 0) begin
        failures++;
        $display("mode %0d never checked", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
