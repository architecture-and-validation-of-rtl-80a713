// tb_prober: checks the three tap formats: time-stream samples sign-extended to 16 bits, FFT
// bins 0/2 in even and 1/3 in odd frames with the odd flag, and scaler bytes; one clock latency.
module tb_prober;
  timeunit 1ns; timeprecision 100ps;
  import chfpga_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst = 1, adc_sof = 0, fft_sof = 0, sc_sof = 0, sof, odd;
  probe_src_e src = PROBE_ADC;
  logic signed [13:0] adc [L];
  logic signed [31:0] fft_re [L/2], fft_im [L/2];
  logic [7:0] sc_q [L/2];
  logic [127:0] data;
  int checks = 0, failures = 0;
  prober #(.LANES(L)) dut (.*);
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [127:0] e;
    logic eodd, esof;
    int frame;
    for (int i = 0; i < L; i++) adc[i] = 0;
    for (int i = 0; i < L / 2; i++) begin fft_re[i] = 0; fft_im[i] = 0; sc_q[i] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    frame = -1;   // the FFT half alternates on every FFT frame strobe, whatever the source
    for (int s = 0; s < 3; s++) begin
      src <= probe_src_e'(s);
      for (int c = 0; c < 40; c++) begin
        logic st;
        st = (c % 8 == 0);
        adc_sof <= st; fft_sof <= st; sc_sof <= st;
        if (st) frame++;
        e = '0;
        for (int i = 0; i < L; i++) begin
          logic signed [13:0] v;
          v = 14'($urandom());
          adc[i] <= v;
          if (s == 0) e[i*16 +: 16] = 16'(v);
        end
        for (int i = 0; i < L / 2; i++) begin
          logic [31:0] r, m;
          logic [7:0] b;
          r = $urandom(); m = $urandom(); b = 8'($urandom());
          fft_re[i] <= r; fft_im[i] <= m; sc_q[i] <= b;
          if (s == 1 && (i % 2) == (frame % 2)) e[(i/2)*64 +: 64] = {r, m};
          if (s == 2) e[i*8 +: 8] = b;
        end
        eodd = (s == 1) && (frame % 2 == 1);
        esof = st;
        @(posedge clk);
        #0.1;
        // one clock of latency: the word sampled at this edge is visible right after it
        begin
          checks++;
          if (data != e || odd != eodd || sof != esof) begin
            failures++;
            if (failures < 5) $display("src %0d cycle %0d: got %h exp %h odd %b/%b", s, c, data, e, odd, eodd);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
