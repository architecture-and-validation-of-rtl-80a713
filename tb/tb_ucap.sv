// tb_ucap: feeds eight probe streams whose words encode {input, frame, word, tag}, lets UCAP
// capture bursts in three slot layouts (1 input x 16 frames, 2 x 8, 8 x 2) and reads them out
// with a randomly stalling consumer. Every lane read is compared with the word expected for its
// slot (input rank, contiguous frame), and the burst/skip counters are checked: the capture
// period is shorter than a readout, so periods must be skipped.
module tb_ucap;
  timeunit 1ns; timeprecision 100ps;
  localparam int N = 8, FW = 8, SL = 16;
  logic clk = 0, rst = 1, enable = 0, out_valid, out_ready = 0, out_first, out_last, out_odd;
  logic [127:0] probe_data [N];
  logic [N-1:0] probe_sof = 0, probe_odd = 0;
  logic [31:0] period_frames = 32'd20, out_data;
  logic [1:0] n_log2 = 0;
  logic [2:0] first_input = 0;
  logic [3:0] out_slot;
  logic [15:0] bursts, skipped;
  int checks = 0, failures = 0;
  ucap #(.N_IN(N), .FRAME_WORDS(FW), .SLOTS(SL)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // free-running probe streams
  int frame = 0, word = 0;
  always @(posedge clk) begin
    if (rst) begin
      frame <= 0; word <= 0;
    end else begin
      for (int c = 0; c < N; c++) begin
        probe_data[c] <= {32'(c), 32'(frame), 32'(word), 32'hA5A50000 | 32'(c)};
        probe_sof[c]  <= (word == 0);
        probe_odd[c]  <= frame[0];
      end
      word  <= (word == FW - 1) ? 0 : word + 1;
      if (word == FW - 1) frame <= frame + 1;
    end
  end
  initial begin
    int f0, lane, w, slot, fper, nb;
    for (int c = 0; c < N; c++) probe_data[c] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int cfg = 0; cfg < 3; cfg++) begin
      n_log2      <= (cfg == 0) ? 2'd0 : (cfg == 1) ? 2'd1 : 2'd3;
      first_input <= (cfg == 1) ? 3'd4 : 3'd0;
      fper = (cfg == 0) ? 16 : (cfg == 1) ? 8 : 2;
      @(posedge clk);
      enable <= 1;
      for (int b = 0; b < 2; b++) begin
        nb = 0;
        f0 = -1;
        lane = 0;
        while (nb < SL * FW * 4) begin
          out_ready <= ($urandom_range(0, 3) != 0);
          @(posedge clk);
          #0.1;
          if (out_valid && out_ready) begin
            // reconstruct the lane's expected 32-bit value
            logic [127:0] e;
            int r, fr;
            if (nb == 0) begin
              checks++;
              if (!out_first) begin failures++; $display("first flag missing"); end
            end
            slot = nb / (FW * 4);
            w    = (nb / 4) % FW;
            lane = nb % 4;
            r    = slot / fper;
            fr   = slot % fper;
            if (f0 < 0 && lane == 2) f0 = int'(out_data);    // frame of the burst's first frame
            if (f0 >= 0 || lane != 2) begin
              e = {32'(int'(first_input) + r), 32'(f0 + fr), 32'(w), 32'hA5A50000 | 32'(int'(first_input) + r)};
              checks++;
              if (out_data != e[lane*32 +: 32] || out_slot != 4'(slot) || out_last != (w == FW - 1 && lane == 3)) begin
                failures++;
                if (failures < 6) $display("cfg %0d slot %0d word %0d lane %0d: got %h exp %h", cfg, slot, w, lane, out_data, e[lane*32 +: 32]);
              end
            end
            nb++;
          end
        end
        out_ready <= 0;
      end
      enable <= 0;
      repeat (3) @(posedge clk);
    end
    checks++;
    if (bursts != 16'd6 || skipped == 0) begin
      failures++;
      $display("bursts %0d skipped %0d", bursts, skipped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
