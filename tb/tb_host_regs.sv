// Self-checking testbench of the host register file. A small model of the
// output buffer answers spectrum reads one cycle later with a value derived
// from the bin number. Checked: register write/read-back, reset values,
// digital inputs and outputs, window-table write strobes, the release
// pulse, the status bits, and spectrum readout in 32-bit and 36-bit mode.
module tb_host_regs;
  import fft_pkg::*;

  localparam int unsigned CAW = 8;
  localparam int unsigned JW  = 4;

  logic pci_clk = 1'b0, pci_rst_n = 1'b0;
  logic bus_wr = 1'b0, bus_rd = 1'b0, bus_rvalid;
  logic [17:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic run, win_en, coef_we, spec_rd_en, release_buf;
  logic [31:0] n_blocks;
  logic [CAW-1:0] coef_addr;
  logic [WIN_W-1:0] coef_data;
  logic [JW+1:0] spec_rd_bin;
  logic [ACC_W-1:0] spec_rd_data;
  logic spec_ready = 1'b0, spec_adc_ovr = 1'b0, spec_acc_ovf = 1'b0;
  logic [31:0] spec_gaps = 32'd7;
  logic [5:0] din = 6'h2D;
  logic [7:0] dout;

  host_regs #(.CAW(CAW), .JW(JW)) dut (.*);

  always #5 pci_clk = ~pci_clk;

  function automatic logic [ACC_W-1:0] model(logic [JW+1:0] b);
    return {4'(b) ^ 4'hA, 8'(b) * 8'd37, 24'(b) + 24'h123456};
  endfunction
  always_ff @(posedge pci_clk) if (spec_rd_en) spec_rd_data <= model(spec_rd_bin);

  int checks = 0, failures = 0, coef_writes = 0, releases = 0;
  always @(posedge pci_clk) begin
    if (coef_we) begin
      coef_writes++;
      checks++;
      if (int'(coef_data) != (int'(coef_addr) * 3) % 512) begin
        failures++;
        $display("coef %0d data %0d", coef_addr, coef_data);
      end
    end
    if (pci_rst_n && release_buf) releases++;
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

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
    if (!bus_rvalid) begin failures++; $display("no rvalid"); end
    d = bus_rdata;
  endtask

  initial begin
    repeat (3000) @(posedge pci_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge pci_clk);
    pci_rst_n <= 1'b1;
    rd(18'h0, d);  chk(d == 0, "CTRL reset");
    rd(18'h1, d);  chk(d == 1, "NBLOCKS reset");
    wr(18'h0, 32'h3); @(negedge pci_clk); chk(run && win_en, "run and window on");
    wr(18'h1, 32'hDEAD_BEEF); rd(18'h1, d); chk(d == 32'hDEAD_BEEF && n_blocks == d, "NBLOCKS");
    wr(18'h4, 32'h1A5); rd(18'h4, d); chk(d == 32'hA5 && dout == 8'hA5, "DOUT");
    repeat (3) @(posedge pci_clk);
    rd(18'h5, d); chk(d == 32'h2D, "DIN");
    spec_ready = 1'b1; spec_acc_ovf = 1'b1;
    rd(18'h2, d); chk(d == 32'h5, "STATUS");
    rd(18'h6, d); chk(d == 7, "GAPS");
    wr(18'h3, 32'h1); repeat (2) @(posedge pci_clk); chk(releases == 1, "release pulse");
    for (int i = 0; i < 20; i++) wr(18'h10000 + 18'(i), 32'((i * 3) % 512));
    repeat (2) @(posedge pci_clk);
    chk(coef_writes == 20, "coefficient writes");
    // 32-bit readout
    for (int b = 0; b < 64; b++) begin
      logic [ACC_W-1:0] m;
      m = model(6'(b));
      rd(18'h20000 + 18'(b), d); chk(d == m[35:4], $sformatf("32-bit bin %0d", b));
    end
    // 36-bit readout
    wr(18'h0, 32'h7);
    for (int b = 0; b < 64; b++) begin
      logic [ACC_W-1:0] m;
      m = model(6'(b));
      rd(18'h20000 + 18'(2 * b), d);     chk(d == m[31:0], $sformatf("36-bit low bin %0d", b));
      rd(18'h20000 + 18'(2 * b + 1), d); chk(d == {28'd0, m[35:32]}, $sformatf("36-bit high bin %0d", b));
    end
    rd(18'h0, d); chk(d == 32'h7, "CTRL readback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
