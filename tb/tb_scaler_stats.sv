// tb_scaler_stats: drives random clip flags and checks the published count after each period,
// in all-bins mode and in single-bin mode (bin index mapped through the DIF word order).
module tb_scaler_stats;
  timeunit 1ns; timeprecision 100ps;
  localparam int B = 4, FW = 16, P = 3;
  logic clk = 0, rst = 1, sof_in = 0, single_bin = 0, done;
  logic [B-1:0] ovf = 0;
  logic [5:0] bin_sel = 0;
  logic [15:0] period_frames = 16'(P);
  logic [31:0] count;
  int checks = 0, failures = 0, periods = 0;
  scaler_stats #(.BINS(B), .FRAME_WORDS(FW)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic int br4(int v);
    return ((v & 1) << 3) | ((v & 2) << 1) | ((v & 4) >> 1) | ((v & 8) >> 3);
  endfunction
  // reference: a period is P frame strobes long; the count covers every clip flag from the
  // strobe that opened the period up to (not including) the strobe that closes it
  initial begin
    int acc, nfr, pub;
    bit expect_done;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    acc = 0; nfr = 0; expect_done = 0;
    for (int mode = 0; mode < 2; mode++) begin
      single_bin <= 1'(mode);
      bin_sel    <= 6'd37;      // bin 37 = 2*16 + 5: slot 2 of word bitrev(5) = 10
      for (int f = 0; f < 4 * P; f++)
        for (int t = 0; t < FW; t++) begin
          logic [B-1:0] o;
          int n;
          o = 4'($urandom());
          sof_in <= (t == 0);
          ovf    <= o;
          n = 0;
          for (int b = 0; b < B; b++)
            if (o[b] && (mode == 0 || (b * FW + br4(t)) == 37)) n++;
          expect_done = 0;
          if (t == 0 && nfr + 1 >= P) begin
            pub = acc; acc = n; nfr = 0; expect_done = 1;
          end else begin
            if (t == 0) nfr++;
            acc += n;
          end
          @(posedge clk);
          #0.1;
          // the first period of each mode mixes both modes and is not compared
          if (expect_done && f >= P + 1) begin
            checks++;
            periods++;
            if (!done || count != 32'(pub)) begin
              failures++;
              $display("mode %0d frame %0d: count %0d exp %0d done %b", mode, f, count, pub, done);
            end
          end
        end
    end
    checks++;
    if (periods < 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
