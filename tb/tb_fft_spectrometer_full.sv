// Full-size testbench of the spectrometer core: fft_spectrometer with every
// parameter at its default (32768-sample frames, 16384 channels), no
// parameter override. The ADC stream repeats one fixed frame (two tones and
// fixed noise). After the core is started over the host bus (unfiltered,
// NBLOCKS = 1) and the first spectra are released, a set of tbins (the two
// tone tbins, their neighbours and spread-out noise tbins) is read back over
// the 32-bit bus and compared with a floating-point DFT of the frame,
// computed here only for those tbins. It also checks the accumulation rate
// (one spectrum per Q = 4096 cycles). Timing: 125 MHz core clock, 33 MHz host
// clock, ADC strobe every second cycle (the 2 Gs/s rate).
module tb_fft_spectrometer_full;
  import fft_pkg::*;

  localparam int unsigned S   = LOG4_NC_DEFAULT;
  localparam int unsigned TW  = 2 * S - 2;
  localparam int unsigned Q   = 1 << TW;
  localparam int unsigned NC  = 4 * Q;
  localparam int unsigned N   = 2 * NC;
  localparam real         PI  = 3.14159265358979323846;
  localparam int unsigned NB  = 24;

  logic clk = 1'b0, rst_n = 1'b0, pci_clk = 1'b0, pci_rst_n = 1'b0;
  logic adc_valid = 1'b0;
  logic signed [ADC_W-1:0] adc_a [ADC_WORDS], adc_b [ADC_WORDS];
  logic bus_wr = 1'b0, bus_rd = 1'b0, bus_rvalid;
  logic [17:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [5:0] din = 6'h0;
  logic [7:0] dout;
  logic [1:0] led_l1, led_l2;
  logic acc_done, buf_overflow;

  fft_spectrometer dut (.*);

  always #4 clk = ~clk;
  always #15 pci_clk = ~pci_clk;

  int checks = 0, failures = 0;
  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  int frame [N];
  // the stages drop low bits once the word width reaches DW
  real scale = 1.0;
  initial for (int s = 0; s < int'(S); s++) scale = scale * real'(1 << stage_shift(s));
  int tbins [NB] = '{0, 1, 2, 999, 1000, 1001, 5554, 5555, 5556, 16383, 100, 2047,
                    4095, 4096, 4097, 8191, 8192, 12288, 333, 7777, 10000, 14000, 15000, 16000};

  function automatic real ref_amp(int k);
    real ar, ai;
    ar = 0.0; ai = 0.0;
    for (int n = 0; n < int'(N); n++) begin
      ar += 2.0 * frame[n] * $cos(2.0 * PI * real'(longint'(n) * longint'(k) % longint'(N)) / N);
      ai -= 2.0 * frame[n] * $sin(2.0 * PI * real'(longint'(n) * longint'(k) % longint'(N)) / N);
    end
    return $sqrt(ar * ar + ai * ai) / 2.0 / scale;
  endfunction

  initial begin
    for (int n = 0; n < int'(N); n++)
      frame[n] = $rtoi($floor(90.0 * $cos(2.0 * PI * 1000.0 * n / N) +
                              25.0 * $sin(2.0 * PI * 5555.0 * n / N) + 0.5)) + int'($urandom % 21) - 10;
  end

  initial begin
    int pos;
    pos = 0;
    for (int i = 0; i < int'(ADC_WORDS); i++) begin adc_a[i] = '0; adc_b[i] = '0; end
    wait (rst_n);
    repeat (4) @(posedge clk);
    forever begin
      adc_valid <= 1'b1;
      for (int i = 0; i < int'(ADC_WORDS); i++) begin
        adc_a[i] <= ADC_W'(frame[pos + 2 * i]);
        adc_b[i] <= ADC_W'(frame[pos + 2 * i + 1]);
      end
      pos = (pos + 32) % int'(N);
      @(posedge clk);
      adc_valid <= 1'b0;
      @(posedge clk);
    end
  end

  int last_done = -1, cyc = 0, n_rate = 0;
  always @(posedge clk) begin
    cyc++;
    if (acc_done) begin
      if (last_done >= 0) begin
        checks++;
        if (cyc - last_done != int'(Q)) begin
          failures++;
          $display("FAIL: accumulations %0d cycles apart, expected %0d", cyc - last_done, Q);
        end else n_rate++;
      end
      last_done = cyc;
    end
    if (rst_n && buf_overflow) begin failures++; $display("FAIL: input buffer overflow"); end
  end

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

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    real maxe;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1; pci_rst_n <= 1'b1;
    wr(18'h1, 32'd1);
    wr(18'h0, 32'h1);
    for (int i = 0; i < 3; i++) begin wait_ready(); release_buf(); end
    wait_ready();
    maxe = 0.0;
    for (int i = 0; i < int'(NB); i++) begin
      real a, r, e;
      rd(18'h20000 + 18'(tbins[i]), d);
      a = $sqrt(real'(d) * 16.0);
      r = ref_amp(tbins[i]);
      e = a - r;
      if (e < 0.0) e = -e;
      if (e > maxe) maxe = e;
      chk(e < 2.0 + 64.0 / (a + 1.0), $sformatf("bin %0d amplitude %f, expected %f", tbins[i], a, r));
    end
    $display("max amplitude error %f over %0d tbins", maxe, NB);
    chk(led_l1 == 2'b01 && led_l2 == 2'b01, "LEDs green");
    chk(n_rate > 0, "spectrum rate checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
