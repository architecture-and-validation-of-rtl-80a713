// tb_scaler: programs two gain banks, streams random (32+32i) bins through the scaler and
// compares each (4+4i) output byte and clip flag with a rounding/clipping model computed here.
// Switches the gain bank mid-run (it must take effect at the next frame strobe) and checks the
// 2-clock latency and that -8 never appears.
module tb_scaler;
  timeunit 1ns; timeprecision 100ps;
  localparam int B = 4, FW = 16, QL = 32;
  logic clk = 0, rst = 1, sof_in = 0, bank_sel = 0, gain_we = 0, gain_wbank = 0, sof_out;
  logic signed [31:0] in_re [B], in_im [B];
  logic [3:0] gain_waddr = 0;
  logic [B*16-1:0] gain_wdata = 0;
  logic [7:0] q [B];
  logic [B-1:0] ovf;
  logic signed [47:0] prod_re [B], prod_im [B];
  int checks = 0, failures = 0, clips = 0, bank_frames [2];
  scaler #(.BINS(B), .FRAME_WORDS(FW), .QUANT_LSB(QL)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [15:0] g [2][FW][B];
  typedef struct packed { logic [31:0] q; logic [3:0] o; } exp_t;
  exp_t expq [$];

  function automatic logic [4:0] quant(longint v);
    longint m, r;
    m = (v < 0) ? -v : v;
    r = (m + (longint'(1) << (QL - 1))) >>> QL;
    if (r > 7) return {1'b1, (v < 0) ? 4'(-7) : 4'(7)};
    return {1'b0, (v < 0) ? 4'(-r) : 4'(r)};
  endfunction

  initial begin
    int bank;
    for (int i = 0; i < B; i++) begin in_re[i] = 0; in_im[i] = 0; end
    for (int k = 0; k < 2; k++) for (int a = 0; a < FW; a++) for (int i = 0; i < B; i++)
      g[k][a][i] = (k == 0) ? 16'($urandom_range(1000, 20000)) : 16'($urandom_range(20000, 65535));
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 2; k++) for (int a = 0; a < FW; a++) begin
      gain_we <= 1; gain_wbank <= 1'(k); gain_waddr <= 4'(a);
      gain_wdata <= {g[k][a][3], g[k][a][2], g[k][a][1], g[k][a][0]};
      @(posedge clk);
    end
    gain_we <= 0;
    bank = 0;
    for (int f = 0; f < 6; f++) begin
      if (f == 3) bank_sel <= 1;      // switch between frames: applies from frame 3
      for (int t = 0; t < FW; t++) begin
        exp_t e;
        sof_in <= (t == 0);
        if (t == 0) bank = (f >= 3) ? 1 : 0;
        if (t == 0) bank_frames[bank]++;
        if (t == 5) bank_sel <= (f >= 2);   // a change requested mid-frame waits for the strobe
        for (int i = 0; i < B; i++) begin
          longint re, im;
          logic [4:0] qr, qi;
          re = longint'($signed($urandom())) >>> $urandom_range(0, 12);
          im = longint'($signed($urandom())) >>> $urandom_range(0, 12);
          in_re[i] <= 32'(re);
          in_im[i] <= 32'(im);
          qr = quant(re * longint'(g[bank][t][i]));
          qi = quant(im * longint'(g[bank][t][i]));
          e.q[i*8 +: 8] = {qr[3:0], qi[3:0]};
          e.o[i] = qr[4] | qi[4];
        end
        expq.push_back(e);
        @(posedge clk);
      end
    end
    sof_in <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (bank_frames[0] == 0 || bank_frames[1] == 0 || clips == 0) begin
      failures++;
      $display("coverage: banks %0d/%0d clips %0d", bank_frames[0], bank_frames[1], clips);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int started = 0, lat = 0, sof_seen = 0;
  always @(posedge clk) begin
    #0.1;
    if (sof_in && !sof_seen) sof_seen = 1;
    else if (sof_seen == 1 && !started) lat++;
    if (!rst && sof_out && !started) begin
      started = 1;
      checks++;
      if (lat != 2) begin failures++; $display("latency %0d", lat); end
    end
    if (started && expq.size() > 0) begin
      exp_t e;
      e = expq.pop_front();
      for (int i = 0; i < B; i++) begin
        checks++;
        if (q[i] != e.q[i*8 +: 8] || ovf[i] != e.o[i] || q[i][7:4] == 4'h8 || q[i][3:0] == 4'h8) begin
          failures++;
          if (failures < 6) $display("bin %0d got %h/%b exp %h/%b", i, q[i], ovf[i], e.q[i*8 +: 8], e.o[i]);
        end
        if (ovf[i]) clips++;
      end
    end
  end
endmodule
