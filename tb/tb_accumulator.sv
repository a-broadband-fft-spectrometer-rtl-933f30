// Self-checking testbench of the accumulation and output buffer at
// LOG4_NC = 3 (Q = 16 cycles per pass, 64 bins). Scenarios:
//  A: three passes accumulated (n_blocks = 3), read from the host clock
//     domain and compared bin by bin with sums formed here; the spectrum
//     must be ready exactly three passes after the start.
//  B: n_blocks = 1 with the host not releasing the buffer: the next two
//     accumulations are lost and counted as gaps; after release the next
//     spectrum is stored and reports the two gaps.
//  C: n_blocks = 4 at full-scale power: the sums saturate, the overflow flag
//     and LED L2 turn red; an ADC saturation pulse turns L1 red.
//  D: run low: both LEDs dark.
module tb_accumulator;
  import fft_pkg::*;

  localparam int unsigned S  = 3;
  localparam int unsigned JW = 2 * S - 2;
  localparam int unsigned Q  = 1 << JW;
  localparam int unsigned NB = 4 * Q;

  logic clk = 1'b0, rst_n = 1'b0, pci_clk = 1'b0, pci_rst_n = 1'b0;
  logic run = 1'b0, in_valid = 1'b0, adc_ovr = 1'b0;
  logic [31:0] n_blocks = 32'd1;
  logic [JW-1:0] in_j = '0;
  logic [PW-1:0] p1 [LANES], p2 [LANES];
  logic [1:0] led_l1, led_l2;
  logic acc_done;
  logic rd_en = 1'b0, release_buf = 1'b0;
  logic [JW+1:0] rd_bin = '0;
  logic [ACC_W-1:0] rd_data;
  logic spec_ready, spec_adc_ovr, spec_acc_ovf;
  logic [31:0] spec_gaps;

  accumulator #(.LOG4_NC(S)) dut (.*);

  always #4 clk = ~clk;
  always #13 pci_clk = ~pci_clk;

  int checks = 0, failures = 0;
  longint expsum [NB];
  int cyc = 0, done_cyc = -1, start_cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (acc_done) done_cyc = cyc;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int bin_of(int b, int j);
    return b * int'(Q) + ((b < 2) ? j : (int'(Q) - j) % int'(Q));
  endfunction

  // one pass of Q cycles; full = full-scale power, add = add into expsum
  task automatic send_pass(bit full_scale, bit add);
    for (int j = 0; j < int'(Q); j++) begin
      in_valid <= 1'b1;
      in_j     <= JW'(j);
      for (int b = 0; b < int'(LANES); b++) begin
        logic [PW-1:0] a, c;
        a = full_scale ? {PW{1'b1}} : PW'({$urandom, $urandom} >> 34);
        c = full_scale ? {PW{1'b1}} : PW'({$urandom, $urandom} >> 34);
        p1[b] <= a;
        p2[b] <= c;
        if (add) expsum[bin_of(b, j)] += longint'(a) + longint'(c);
      end
      @(posedge clk);
    end
  endtask

  task automatic idle(int n);
    in_valid <= 1'b0;
    repeat (n) @(posedge clk);
  endtask

  task automatic read_check(string tag, longint lim);
    int bad;
    bad = 0;
    @(posedge pci_clk);
    for (int k = 0; k < int'(NB); k++) begin
      longint e;
      rd_en  <= 1'b1;
      rd_bin <= (JW+2)'(k);
      @(posedge pci_clk);
      rd_en <= 1'b0;
      @(posedge pci_clk);
      e = (expsum[k] > lim) ? lim : expsum[k];
      if (longint'(rd_data) != e) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d bins differ", tag, bad));
  endtask

  task automatic release_it();
    @(posedge pci_clk) release_buf <= 1'b1;
    @(posedge pci_clk) release_buf <= 1'b0;
    repeat (8) @(posedge pci_clk);
    check(!spec_ready, "ready still high after release");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint MAXACC = (longint'(1) << ACC_W) - 1;

  initial begin
    for (int b = 0; b < int'(LANES); b++) begin p1[b] = '0; p2[b] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1; pci_rst_n <= 1'b1;
    // ---- A
    n_blocks <= 32'd3;
    run <= 1'b1;
    idle(5);
    for (int k = 0; k < int'(NB); k++) expsum[k] = 0;
    start_cyc = cyc;
    send_pass(0, 1); send_pass(0, 1); send_pass(0, 1);
    idle(10);
    check(done_cyc == start_cyc + 3 * int'(Q) + 2, $sformatf("A: done at %0d, start %0d", done_cyc, start_cyc));
    wait (spec_ready);
    check(!spec_adc_ovr && !spec_acc_ovf && spec_gaps == 0, "A: flags");
    check(led_l1 == 2'b01 && led_l2 == 2'b01, "A: LEDs green");
    read_check("A", MAXACC);
    release_it();
    // ---- B
    n_blocks <= 32'd1;
    idle(4);
    for (int k = 0; k < int'(NB); k++) expsum[k] = 0;
    send_pass(0, 1);            // stored
    send_pass(0, 0);            // lost
    send_pass(0, 0);            // lost
    idle(10);
    wait (spec_ready);
    read_check("B1", MAXACC);
    release_it();
    for (int k = 0; k < int'(NB); k++) expsum[k] = 0;
    send_pass(0, 1);
    idle(10);
    wait (spec_ready);
    check(spec_gaps == 2, $sformatf("B: gaps %0d, expected 2", spec_gaps));
    read_check("B2", MAXACC);
    release_it();
    // ---- C
    n_blocks <= 32'd4;
    idle(4);
    for (int k = 0; k < int'(NB); k++) expsum[k] = 0;
    send_pass(1, 1);
    adc_ovr <= 1'b1;
    send_pass(1, 1);
    adc_ovr <= 1'b0;
    send_pass(1, 1); send_pass(1, 1);
    idle(10);
    wait (spec_ready);
    check(spec_acc_ovf && spec_adc_ovr, "C: flags");
    check(led_l1 == 2'b10 && led_l2 == 2'b10, "C: LEDs red");
    read_check("C", MAXACC);
    release_it();
    // ---- D
    run <= 1'b0;
    idle(5);
    check(led_l1 == 2'b00 && led_l2 == 2'b00, "D: LEDs dark");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
