// Self-checking testbench of the window multiplication at LOG4_NC = 3
// (128-sample frames, 8 cycles per frame). It loads a random symmetric
// half-window through the coefficient port, streams ADC words (A = even,
// B = odd samples) with the strobe every second or third cycle, and checks
// every output sample against x*w computed here, in both windowed and
// bypass mode, plus the frame-start marker, the two-cycle spacing of the
// gearbox output and the saturation flag.
module tb_window_mult;
  import fft_pkg::*;

  localparam int unsigned S   = 3;
  localparam int unsigned N   = 2 * (4 ** S);
  localparam int unsigned CAW = 2 * S;
  localparam int unsigned NW  = 6 * N / 32;     // ADC words sent (6 frames)

  logic clk = 1'b0, coef_clk = 1'b0, rst_n = 1'b0;
  logic adc_valid = 1'b0, win_en = 1'b0, coef_we = 1'b0;
  logic signed [ADC_W-1:0] adc_a [ADC_WORDS], adc_b [ADC_WORDS];
  logic [CAW-1:0] coef_addr = '0;
  logic [WIN_W-1:0] coef_data = '0;
  logic out_valid, out_sof, adc_ovr;
  logic signed [WIN_W-1:0] out_x [SPC];

  window_mult #(.LOG4_NC(S)) dut (.*);

  always #4 clk = ~clk;
  always #15 coef_clk = ~coef_clk;

  int checks = 0, failures = 0;
  int w [N/2];
  int samp [NW * 32];
  int nout = 0, ovr_seen = 0, ovr_expected = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_x(int n, bit wen);
    int x, c;
    x = samp[n];
    c = w[(n % N < N/2) ? n % N : N - 1 - (n % N)];
    if (!wen) return 2 * x;
    return (x * c + 128) >>> 8;
  endfunction

  bit cur_wen;

  initial begin
    for (int i = 0; i < int'(N/2); i++) w[i] = $urandom % 512;
    for (int i = 0; i < int'(NW * 32); i++) samp[i] = int'($urandom % 250) - 125;
    samp[77] = 127;          // saturated sample in word 2
    ovr_expected = 1;
    for (int i = 0; i < int'(ADC_WORDS); i++) begin adc_a[i] = '0; adc_b[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // load the half window
    for (int i = 0; i < int'(N/2); i++) begin
      @(posedge coef_clk);
      coef_we <= 1'b1; coef_addr <= CAW'(i); coef_data <= WIN_W'(w[i]);
    end
    @(posedge coef_clk) coef_we <= 1'b0;
    @(posedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      win_en  <= (pass == 0);
      cur_wen = (pass == 0);
      for (int wd = 0; wd < int'(NW); wd++) begin
        adc_valid <= 1'b1;
        for (int i = 0; i < int'(ADC_WORDS); i++) begin
          adc_a[i] <= ADC_W'(samp[32 * wd + 2 * i]);
          adc_b[i] <= ADC_W'(samp[32 * wd + 2 * i + 1]);
        end
        @(posedge clk);
        adc_valid <= 1'b0;
        @(posedge clk);
        if (wd % 5 == 4) @(posedge clk);    // occasional slower strobe
      end
      repeat (6) @(posedge clk);
    end
    checks++;
    if (nout != int'(2 * NW * 2)) begin
      failures++;
      $display("output cycles %0d, expected %0d", nout, 2 * NW * 2);
    end
    checks++;
    if (ovr_seen != 2 * ovr_expected) begin
      failures++;
      $display("saturation flagged %0d times, expected %0d", ovr_seen, 2 * ovr_expected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: output cycle nout holds samples 16*(nout mod 2*NW)...
  always @(posedge clk) if (rst_n) begin
    if (adc_ovr) ovr_seen++;
    if (out_valid) begin
      int cyc, fcyc;
      cyc  = nout % int'(2 * NW);
      fcyc = cyc % int'(N / 16);
      checks++;
      if (out_sof != (fcyc == 0)) begin
        failures++;
        $display("sof wrong at output cycle %0d", nout);
      end
      for (int l = 0; l < int'(SPC); l++) begin
        int e;
        e = expect_x(16 * cyc + l, nout < int'(2 * NW));
        checks++;
        if (int'(out_x[l]) != e) begin
          failures++;
          if (failures < 10) $display("cycle %0d lane %0d: got %0d expected %0d", nout, l, out_x[l], e);
        end
      end
      nout++;
    end
  end
endmodule
