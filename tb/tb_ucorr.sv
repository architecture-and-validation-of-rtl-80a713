// tb_ucorr: checks the correlator against a model that integrates every product of every bin.
// Eight inputs, four bins per clock, frames of 4 words (16 bins), integrations of 2 frames and
// 8-bit accumulators, so full-scale inputs saturate within one integration. Random (4+4i)
// bytes in -7..7 arrive continuously. The readout stalls at random (ready 3 in 4), so most
// integrations end while a dump is still streaming: those must be dropped and counted, and
// every dump that does come out must carry, beat for beat, the saturated sums of the
// integration named by its frame number, in bin-then-product order. The dump must start two
// clocks after the last word of its integration, and dumps + dropped must equal the number of
// integrations that ended.
module tb_ucorr;
  timeunit 1ns; timeprecision 100ps;
  import chfpga_pkg::*;

  localparam int N  = 8;
  localparam int B  = 4;
  localparam int FW = 4;
  localparam int AC = 8;
  localparam int I  = 2;
  localparam int NP = N * (N + 1) / 2;
  localparam int NF = 420;
  localparam int AMAX = (1 << (AC - 1)) - 1;

  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic          enable, in_sof, out_valid, out_ready, out_first, out_last;
  logic [63:0]   in_frame_no, out_frame_no;
  logic [7:0]    in_q [N][B];
  logic [2*AC-1:0] out_data;
  logic [$clog2(FW*B)-1:0] out_bin;
  logic [$clog2(NP)-1:0]   out_prod;
  logic [15:0]   dumps, dropped;

  ucorr #(.N_IN(N), .BINS(B), .FRAME_WORDS(FW), .ACC_W(AC)) dut (
    .clk, .rst, .enable, .int_frames(17'(I)), .in_sof, .in_frame_no, .in_q,
    .out_data, .out_valid, .out_ready, .out_first, .out_last, .out_bin, .out_prod,
    .out_frame_no, .dumps, .dropped
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat (NF * FW + 5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: saturated sums per integration
  int mre [NF/I][FW][B][NP];
  int mim [NF/I][FW][B][NP];
  longint last_word_cyc [NF/I];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  localparam longint F0 = 1000;

  function automatic int sat(input int v);
    return v > AMAX ? AMAX : (v < -AMAX ? -AMAX : v);
  endfunction
  function automatic int s4(input logic [3:0] v);
    return int'($signed(v));
  endfunction

  int pa [NP], pb [NP];
  initial begin
    int p;
    p = 0;
    for (int i = 0; i < N; i++)
      for (int j = i; j < N; j++) begin
        pa[p] = i; pb[p] = j; p++;
      end
  end

  initial begin
    enable = 0; in_sof = 0; in_frame_no = 0; out_ready = 0;
    for (int c = 0; c < N; c++) for (int k = 0; k < B; k++) in_q[c][k] = '0;
    repeat (4) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    enable <= 1;
    for (int f = 0; f < NF; f++) begin
      int g;
      g = f / I;
      for (int t = 0; t < FW; t++) begin
        logic [7:0] v [N][B];
        for (int c = 0; c < N; c++)
          for (int k = 0; k < B; k++) begin
            int re, im;
            re = $urandom_range(0, 14);
            im = $urandom_range(0, 14);
            v[c][k] = {4'(re - 7), 4'(im - 7)};
            in_q[c][k] <= v[c][k];
          end
        for (int k = 0; k < B; k++)
          for (int q = 0; q < NP; q++) begin
            int ar, ai, br, bi, pr, pim;
            ar = s4(v[pa[q]][k][7:4]); ai = s4(v[pa[q]][k][3:0]);
            br = s4(v[pb[q]][k][7:4]); bi = s4(v[pb[q]][k][3:0]);
            pr  = ar * br + ai * bi;
            pim = ai * br - ar * bi;
            if (f % I == 0) begin
              mre[g][t][k][q] = sat(pr);
              mim[g][t][k][q] = sat(pim);
            end else begin
              mre[g][t][k][q] = sat(mre[g][t][k][q] + pr);
              mim[g][t][k][q] = sat(mim[g][t][k][q] + pim);
            end
          end
        in_sof <= (t == 0);
        in_frame_no <= 64'(F0 + f);
        if (t == FW - 1 && f % I == I - 1) last_word_cyc[g] = cyc + 1;
        @(posedge clk);
      end
    end
    // let the last dump drain
    wait (!out_valid);
    repeat (10) @(posedge clk);
    $display("dumps %0d dropped %0d beats %0d", dumps, dropped, beats);
    check(dumps >= 2, "at least two dumps");
    check(dropped >= 1, "at least one dropped integration");
    check(int'(dumps) + int'(dropped) == NF / I, $sformatf("dumps+dropped %0d exp %0d", dumps + dropped, NF / I));
    check(beats == int'(dumps) * FW * B * NP, "beat count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ready: random stalls
  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  int beats = 0;
  int eidx = 0;
  int g_cur = 0;
  logic prev_valid = 0;
  always @(negedge clk) begin
    if (!rst && out_valid && !prev_valid) begin
      int g;
      g = int'(out_frame_no - 64'(F0)) / I;
      check(cyc - last_word_cyc[g] == 2, $sformatf("dump start %0d clocks after last word", cyc - last_word_cyc[g]));
    end
    prev_valid = out_valid;
    if (!rst && out_valid && out_ready) begin
      int w, k, q;
      w = eidx / (B * NP);
      k = (eidx / NP) % B;
      q = eidx % NP;
      if (eidx == 0) begin
        check(out_first, "out_first on first beat");
        g_cur = int'(out_frame_no - 64'(F0)) / I;
        check(int'(out_frame_no - 64'(F0)) % I == 0, "dump frame number at integration start");
      end
      check(out_bin == $bits(out_bin)'(w * B + k) && out_prod == $bits(out_prod)'(q), "bin/product order");
      check($signed(out_data[2*AC-1:AC]) == mre[g_cur][w][k][q] && $signed(out_data[AC-1:0]) == mim[g_cur][w][k][q],
            $sformatf("int %0d word %0d slot %0d prod %0d got %0d,%0d exp %0d,%0d", g_cur, w, k, q,
                      $signed(out_data[2*AC-1:AC]), $signed(out_data[AC-1:0]), mre[g_cur][w][k][q], mim[g_cur][w][k][q]));
      check(out_last == (eidx == FW * B * NP - 1), "out_last");
      beats++;
      eidx = (eidx == FW * B * NP - 1) ? 0 : eidx + 1;
    end
  end
endmodule
