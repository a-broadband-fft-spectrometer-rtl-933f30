// End-to-end testbench of the spectrometer core at LOG4_NC = 3 (frames of
// 128 samples, 64 channels). The ADC stream repeats one fixed frame (two
// tones plus fixed noise), so every spectrum is the same and each
// accumulated bin must equal 2*NBLOCKS times the power of that frame, which
// is computed here with a floating-point DFT of the windowed samples. All
// control goes through the host bus. Mechanisms driven and counted:
//   unfiltered and windowed (Kaiser table loaded over the bus) spectra,
//   32-bit and 36-bit readout, accumulation over several passes, the
//   spectrum rate (one accumulation per NBLOCKS*Q cycles), data gaps while
//   the host holds the buffer, stalls of the ADC strobe (processing clock
//   stopped), ADC saturation (L1 red), accumulator overflow (L2 red),
//   idle (LEDs dark), digital I/O.
module tb_fft_spectrometer;
  import fft_pkg::*;

  localparam int unsigned S   = 3;
  localparam int unsigned TW  = 2 * S - 2;
  localparam int unsigned Q   = 1 << TW;
  localparam int unsigned NC  = 4 * Q;
  localparam int unsigned N   = 2 * NC;
  localparam int unsigned NCH = N / 2;
  localparam real         PI  = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0, pci_clk = 1'b0, pci_rst_n = 1'b0;
  logic adc_valid = 1'b0;
  logic signed [ADC_W-1:0] adc_a [ADC_WORDS], adc_b [ADC_WORDS];
  logic bus_wr = 1'b0, bus_rd = 1'b0, bus_rvalid;
  logic [17:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [5:0] din = 6'h15;
  logic [7:0] dout;
  logic [1:0] led_l1, led_l2;
  logic acc_done, buf_overflow;

  fft_spectrometer #(.LOG4_NC(S)) dut (.*);

  always #4 clk = ~clk;          // 125 MHz
  always #15 pci_clk = ~pci_clk; // 33 MHz

  int checks = 0, failures = 0;
  int n_unfilt = 0, n_win = 0, n_r32 = 0, n_r36 = 0, n_gap = 0, n_stall = 0;
  int n_sat = 0, n_ovf = 0, n_idle = 0, n_rate = 0, n_dio = 0, n_multi = 0;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  // ---------------- stimulus frames ----------------
  int frame [2][N];            // mode 0: normal, mode 1: saturating
  int mode = 0;
  bit stall_en = 0;
  int w [N/2];

  function automatic real bessel_i0(real x);
    real s, t;
    s = 1.0; t = 1.0;
    for (int k = 1; k < 30; k++) begin
      t = t * (x / (2.0 * k)) * (x / (2.0 * k));
      s += t;
    end
    return s;
  endfunction

  // reference amplitude |X[k]|/2 of the frame as the core scales it
  real ref_amp [2][NCH];       // [window off/on]
  task automatic make_ref(int m);
    for (int win = 0; win < 2; win++)
      for (int k = 0; k < int'(NCH); k++) begin
        real ar, ai;
        ar = 0.0; ai = 0.0;
        for (int n = 0; n < int'(N); n++) begin
          int y, c;
          c = w[(n < int'(N/2)) ? n : int'(N) - 1 - n];
          y = (win != 0) ? ((frame[m][n] * c + 128) >>> 8) : 2 * frame[m][n];
          ar += y * $cos(2.0 * PI * n * k / N);
          ai -= y * $sin(2.0 * PI * n * k / N);
        end
        ref_amp[win][k] = $sqrt(ar * ar + ai * ai) / 2.0;
      end
  endtask

  initial begin
    for (int n = 0; n < int'(N); n++) begin
      frame[0][n] = $rtoi($floor(90.0 * $cos(2.0 * PI * 5.0 * n / N) +
                                 25.0 * $sin(2.0 * PI * 37.0 * n / N) + 0.5)) + int'($urandom % 21) - 10;
      frame[1][n] = (n % 16 == 3) ? 127 : frame[0][n] / 2;
    end
    for (int n = 0; n < int'(N / 2); n++) begin
      real r;
      r = 2.0 * n / (N - 1) - 1.0;
      w[n] = $rtoi($floor(511.0 * bessel_i0(6.0 * $sqrt(1.0 - r * r)) / bessel_i0(6.0) + 0.5));
    end
    make_ref(0);
  end

  // ADC stream: one 32-sample word per strobe, strobe every second cycle,
  // with random pauses while stall_en is set
  initial begin
    int pos, m;
    pos = 0; m = 0;
    for (int i = 0; i < int'(ADC_WORDS); i++) begin adc_a[i] = '0; adc_b[i] = '0; end
    wait (rst_n);
    repeat (4) @(posedge clk);
    forever begin
      if (pos == 0) m = mode;
      adc_valid <= 1'b1;
      for (int i = 0; i < int'(ADC_WORDS); i++) begin
        adc_a[i] <= ADC_W'(frame[m][pos + 2 * i]);
        adc_b[i] <= ADC_W'(frame[m][pos + 2 * i + 1]);
      end
      pos = (pos + 32) % int'(N);
      @(posedge clk);
      adc_valid <= 1'b0;
      @(posedge clk);
      if (stall_en && ($urandom % 3 == 0)) begin
        repeat (1 + $urandom % 5) @(posedge clk);
        n_stall++;
      end
    end
  end

  // rate monitor: spacing of accumulation ends
  int last_done = -1, cyc = 0, rate_expect = 0;
  always @(posedge clk) begin
    cyc++;
    if (acc_done) begin
      if (rate_expect > 0 && last_done >= 0) begin
        checks++;
        if (cyc - last_done != rate_expect) begin
          failures++;
          $display("FAIL: accumulations %0d cycles apart, expected %0d", cyc - last_done, rate_expect);
        end else n_rate++;
      end
      last_done = cyc;
    end
    if (rst_n && buf_overflow) begin
      failures++;
      $display("FAIL: input buffer overflow");
    end
  end

  // ---------------- host bus ----------------
  task automatic wr(logic [17:0] a, logic [31:0] d);
    @(posedge pci_clk);
    bus_wr <= 1'b1; bus_addr <= a; bus_wdata <= d;
    @(posedge pci_clk);
    bus_wr <= 1'b0;
  endtask

  task automatic rd(logic [17:0] a, output logic [31:0] d);
    @(posedge pci_clk);
    bus_rd <= 1'b1; bus_addr <= a;
    @(posedge pci_clk);
    bus_rd <= 1'b0;
    @(negedge pci_clk);
    d = bus_rdata;
  endtask

  task automatic wait_ready();
    logic [31:0] st;
    st = 0;
    while (!st[0]) rd(18'h2, st);
  endtask

  task automatic release_buf();
    wr(18'h3, 32'h1);
    repeat (6) @(posedge pci_clk);
  endtask

  // let a configuration change flush through the pipelines
  task automatic discard(int n);
    for (int i = 0; i < n; i++) begin
      wait_ready();
      release_buf();
    end
  endtask

  // read and check one stored spectrum
  task automatic check_spectrum(int win, int nb, bit w36, string tag);
    int bad;
    real maxe;
    bad = 0; maxe = 0.0;
    wait_ready();
    for (int k = 0; k < int'(NCH); k++) begin
      logic [31:0] lo, hi;
      real v, a, e;
      if (w36) begin
        rd(18'h20000 + 18'(2 * k), lo);
        rd(18'h20000 + 18'(2 * k + 1), hi);
        v = real'({hi[3:0], lo});
        n_r36++;
      end else begin
        rd(18'h20000 + 18'(k), lo);
        v = real'(lo) * 16.0;
        n_r32++;
      end
      a = $sqrt(v / nb);            // |X'| from 2*nb spectra of |X'|^2/2
      e = a - ref_amp[win][k];
      if (e < 0.0) e = -e;
      if (e > maxe) maxe = e;
      if (e > 4.0 + (w36 ? 0.0 : 4.0 / (a + 1.0) * 16.0)) begin
        bad++;
        if (bad < 5) $display("%s: bin %0d amplitude %f, expected %f", tag, k, a, ref_amp[win][k]);
      end
    end
    chk(bad == 0, $sformatf("%s: %0d bins off (max error %f)", tag, bad, maxe));
    $display("%s: max amplitude error %f", tag, maxe);
    if (win != 0) n_win++; else n_unfilt++;
    if (nb > 1) n_multi++;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1; pci_rst_n <= 1'b1;
    // digital I/O
    wr(18'h4, 32'h5A);
    repeat (4) @(posedge pci_clk);
    rd(18'h5, d);
    chk(dout == 8'h5A && d == 32'h15, "digital I/O"); n_dio++;
    // idle: nothing running
    chk(led_l1 == 2'b00 && led_l2 == 2'b00, "LEDs dark before run"); n_idle++;
    // window table
    for (int n = 0; n < int'(N / 2); n++) wr(18'h10000 + 18'(n), 32'(w[n]));
    // 1: unfiltered, one pass, 32-bit readout
    wr(18'h1, 32'd1);
    wr(18'h0, 32'h1);
    discard(3);
    check_spectrum(0, 1, 0, "unfiltered nb=1");
    chk(led_l1 == 2'b01 && led_l2 == 2'b01, "LEDs green");
    // 2: rate with the buffer held: accumulations continue, lost ones are gaps
    rate_expect = int'(Q);
    wait_ready();
    repeat (400) @(posedge clk);
    rate_expect = 0;
    release_buf();
    wait_ready();
    rd(18'h6, d);
    chk(d > 0, "gaps counted while the buffer was held");
    if (d > 0) n_gap++;
    release_buf();
    // 3: Kaiser window, three passes, 36-bit readout
    wr(18'h1, 32'd3);
    wr(18'h0, 32'h7);
    discard(3);
    rate_expect = 3 * int'(Q);
    check_spectrum(1, 3, 1, "kaiser nb=3 36-bit");
    rate_expect = 0;
    release_buf();
    // 4: stalled ADC strobe, unfiltered, two passes, 32-bit
    stall_en = 1;
    wr(18'h1, 32'd2);
    wr(18'h0, 32'h1);
    discard(3);
    check_spectrum(0, 2, 0, "unfiltered nb=2 with stalls");
    release_buf();
    stall_en = 0;
    // 5: saturating input
    mode = 1;
    discard(3);
    wait_ready();
    rd(18'h2, d);
    chk(d[1] && !d[2], "ADC saturation flagged, no overflow");
    chk(led_l1 == 2'b10 && led_l2 == 2'b01, "L1 red");
    if (d[1]) n_sat++;
    release_buf();
    mode = 0;
    // 6: accumulator overflow with a long accumulation
    wr(18'h1, 32'd2500);
    discard(2);
    wait_ready();
    rd(18'h2, d);
    chk(d[2] && !d[1], "accumulator overflow flagged");
    chk(led_l2 == 2'b10 && led_l1 == 2'b01, "L2 red");
    if (d[2]) n_ovf++;
    rd(18'h20000 + 18'd5, d);
    chk(d == 32'hFFFF_FFFF, "tone bin saturated");
    release_buf();
    // 7: stop
    wr(18'h0, 32'h0);
    repeat (20) @(posedge clk);
    chk(led_l1 == 2'b00 && led_l2 == 2'b00, "LEDs dark when stopped"); n_idle++;

    $display("mechanisms: unfiltered=%0d window=%0d read32=%0d read36=%0d multi-pass=%0d rate=%0d gaps=%0d stalls=%0d saturation=%0d overflow=%0d idle=%0d dio=%0d",
             n_unfilt, n_win, n_r32, n_r36, n_multi, n_rate, n_gap, n_stall, n_sat, n_ovf, n_idle, n_dio);
    chk(n_unfilt > 0, "unfiltered mode exercised");
    chk(n_win > 0, "window mode exercised");
    chk(n_r32 > 0 && n_r36 > 0, "both readout widths exercised");
    chk(n_multi > 0, "multi-pass accumulation exercised");
    chk(n_rate > 0, "spectrum rate checked");
    chk(n_gap > 0, "data gap exercised");
    chk(n_stall > 0, "stalls exercised");
    chk(n_sat > 0, "saturation exercised");
    chk(n_ovf > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
