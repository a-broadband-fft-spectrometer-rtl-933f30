// FFT spectrometer core: 2 Gsample/s of 8-bit samples in, accumulated
// 16384-channel power spectra out to the host.
//
// Data path (clk = 125 MHz processing clock):
//   window_mult   2x16 ADC words per 62.5 MHz strobe -> 16 windowed 9-bit
//                 samples per cycle
//   input_buffer  complex pairs, frame pairs, lock-step feed of both pipelines
//   fft_pipeline  x2, 32768-point real FFT each, alternate frames,
//                 4 complex words in and 4 bins out per cycle
//   power_spectrum x2, 34-bit |X|^2
//   accumulator   36-bit sums over NBLOCKS pairs of spectra, output buffer
//                 read from the host clock domain
// Host side (pci_clk): host_regs on the local bus of the PCI interface core,
// which itself, like the ADCs and the clock manager, lies outside this
// module; their signals are the ports below.
//
// Throughput: every 4096 cycles (32.768 us) both pipelines finish one
// spectrum each, so the core keeps up with the ADC without dead time. The
// processing stops (holds its state) when no ADC data arrive. The first
// spectrum leaves the pipelines about three frame pairs after the first
// sample. LOG4_NC scales every block together (frames of 2*4**LOG4_NC
// samples; 7 is the paper's 32768).
module fft_spectrometer
  import fft_pkg::*;
#(
  parameter int unsigned LOG4_NC = LOG4_NC_DEFAULT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // ADC interface (62.5 MHz data rate as a strobe in the clk domain)
  input  logic                     adc_valid,
  input  logic signed [ADC_W-1:0]  adc_a [ADC_WORDS],
  input  logic signed [ADC_W-1:0]  adc_b [ADC_WORDS],
  // local bus of the PCI interface core
  input  logic                     pci_clk,
  input  logic                     pci_rst_n,
  input  logic                     bus_wr,
  input  logic                     bus_rd,
  input  logic [17:0]              bus_addr,
  input  logic [31:0]              bus_wdata,
  output logic [31:0]              bus_rdata,
  output logic                     bus_rvalid,
  // front panel
  input  logic [5:0]               din,
  output logic [7:0]               dout,
  output logic [1:0]               led_l1,
  output logic [1:0]               led_l2,
  // diagnostics
  output logic                     acc_done,
  output logic                     buf_overflow
);
  localparam int unsigned TW  = 2 * LOG4_NC - 2;
  localparam int unsigned CAW = 2 * LOG4_NC;

  // configuration from the host
  logic               run, win_en;
  logic [31:0]        n_blocks;
  logic               coef_we;
  logic [CAW-1:0]     coef_addr;
  logic [WIN_W-1:0]   coef_data;
  logic               spec_rd_en, release_buf, spec_ready, spec_adc_ovr, spec_acc_ovf;
  logic [TW+1:0]      spec_rd_bin;
  logic [ACC_W-1:0]   spec_rd_data;
  logic [31:0]        spec_gaps;

  // window
  logic                    w_valid, w_sof, adc_ovr;
  logic signed [WIN_W-1:0] w_x [SPC];

  window_mult #(.LOG4_NC(LOG4_NC)) u_window (
    .clk(clk), .rst_n(rst_n), .adc_valid(adc_valid), .adc_a(adc_a), .adc_b(adc_b),
    .win_en(win_en), .coef_clk(pci_clk), .coef_we(coef_we), .coef_addr(coef_addr),
    .coef_data(coef_data), .out_valid(w_valid), .out_sof(w_sof), .out_x(w_x),
    .adc_ovr(adc_ovr)
  );

  // input buffer
  logic          fe_en;
  logic [TW-1:0] fe_t;
  cplx_t         fe_a [LANES], fe_b [LANES];

  input_buffer #(.LOG4_NC(LOG4_NC)) u_ibuf (
    .clk(clk), .rst_n(rst_n), .in_valid(w_valid), .in_sof(w_sof), .in_x(w_x),
    .out_en(fe_en), .out_t(fe_t), .out_a(fe_a), .out_b(fe_b), .overflow(buf_overflow)
  );

  // two pipelines and power units
  logic          f1_valid, f2_valid, ps1_valid, ps2_valid;
  logic [TW-1:0] f1_j, f2_j, ps1_j, ps2_j;
  cplx_t         f1_x [LANES], f2_x [LANES];
  logic [PW-1:0] ps1_p [LANES], ps2_p [LANES];

  fft_pipeline #(.LOG4_NC(LOG4_NC)) u_fft1 (
    .clk(clk), .rst_n(rst_n), .en(fe_en), .x_in(fe_a), .t_in(fe_t),
    .out_valid(f1_valid), .x_out(f1_x), .out_j(f1_j)
  );
  fft_pipeline #(.LOG4_NC(LOG4_NC)) u_fft2 (
    .clk(clk), .rst_n(rst_n), .en(fe_en), .x_in(fe_b), .t_in(fe_t),
    .out_valid(f2_valid), .x_out(f2_x), .out_j(f2_j)
  );

  power_spectrum #(.JW(TW)) u_power1 (
    .clk(clk), .rst_n(rst_n), .in_valid(f1_valid), .in_j(f1_j), .x(f1_x),
    .out_valid(ps1_valid), .out_j(ps1_j), .p(ps1_p)
  );
  power_spectrum #(.JW(TW)) u_power2 (
    .clk(clk), .rst_n(rst_n), .in_valid(f2_valid), .in_j(f2_j), .x(f2_x),
    .out_valid(ps2_valid), .out_j(ps2_j), .p(ps2_p)
  );

  accumulator #(.LOG4_NC(LOG4_NC)) u_acc (
    .clk(clk), .rst_n(rst_n), .run(run), .n_blocks(n_blocks),
    .in_valid(ps1_valid), .in_j(ps1_j), .p1(ps1_p), .p2(ps2_p),
    .adc_ovr(adc_ovr), .led_l1(led_l1), .led_l2(led_l2), .acc_done(acc_done),
    .pci_clk(pci_clk), .pci_rst_n(pci_rst_n), .rd_en(spec_rd_en), .rd_bin(spec_rd_bin),
    .rd_data(spec_rd_data), .release_buf(release_buf), .spec_ready(spec_ready),
    .spec_adc_ovr(spec_adc_ovr), .spec_acc_ovf(spec_acc_ovf), .spec_gaps(spec_gaps)
  );

  host_regs #(.CAW(CAW), .JW(TW)) u_regs (
    .pci_clk(pci_clk), .pci_rst_n(pci_rst_n), .bus_wr(bus_wr), .bus_rd(bus_rd),
    .bus_addr(bus_addr), .bus_wdata(bus_wdata), .bus_rdata(bus_rdata),
    .bus_rvalid(bus_rvalid), .run(run), .win_en(win_en), .n_blocks(n_blocks),
    .coef_we(coef_we), .coef_addr(coef_addr), .coef_data(coef_data),
    .spec_rd_en(spec_rd_en), .spec_rd_bin(spec_rd_bin), .spec_rd_data(spec_rd_data),
    .release_buf(release_buf), .spec_ready(spec_ready), .spec_adc_ovr(spec_adc_ovr),
    .spec_acc_ovf(spec_acc_ovf), .spec_gaps(spec_gaps), .din(din), .dout(dout)
  );

  // the two pipelines run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) ps1_valid == ps2_valid && (!ps1_valid || ps1_j == ps2_j));
endmodule
