// Accumulation and output buffer.
//
// The two pipelines deliver their power spectra in lock step, four bins per
// cycle each, bin k_b = b*Q + (b < 2 ? j : (-j mod Q)) on lane b. One pass
// of Q cycles (j = 0..Q-1) therefore carries two complete spectra, one from
// each pipeline: 2 x 16.384 us of signal at the default size. The
// accumulator adds p1 + p2 of each bin to a 36-bit running sum held in four
// banks (one per lane, address j or -j mod Q, one read and one write per
// bank and cycle), for n_blocks passes, i.e. 2*n_blocks spectra
// (n_blocks = 0 counts as 1). The first pass of an accumulation overwrites
// the sums, so accumulations follow each other without a gap. Sums saturate
// at 2**36-1 and set the overflow flag of the accumulation.
//
// During the last pass the final sums are also written into the output
// buffer, a second set of banks read from the host clock domain (pci_clk)
// one bin per read, one cycle of read latency. A four-phase handshake hands
// the buffer across: the clk side sets 'full' at the end of the last pass;
// the host side sees spec_ready, reads, and pulses release; the clk side
// clears 'full'. If the buffer is still full when a last pass begins, that
// accumulation is not stored and the gap counter counts it (the host read
// time bounds the spectrum rate). The flags of the stored spectrum and the
// number of accumulations lost before it are held with it (spec_*), stable while spec_ready is high.
//
// Front-panel LEDs ({red, green}): L1 shows whether the ADC range was
// exceeded during the last finished accumulation, L2 whether its sums
// overflowed; both are dark while run is low or before the first one ends.
// run is synchronised here; n_blocks is taken when an accumulation starts
// and should be changed only while run is low.
//
// From the paper: accumulation of a requested number of spectra, minimum two
// spectra (32.768 us), 36-bit output, dual-port output buffer between the
// pipeline and PCI clocks, overflow shown on LED L2, ADC saturation on L1,
// data gaps when spectra come faster than they can be read. This design's
// choices: the pass/bank organisation, saturation, the handshake, the gap
// counter and the LED encoding.
module accumulator
  import fft_pkg::*;
#(
  parameter int unsigned LOG4_NC = LOG4_NC_DEFAULT,
  parameter int unsigned JW      = 2 * LOG4_NC - 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run,
  input  logic [31:0]         n_blocks,
  input  logic                in_valid,
  input  logic [JW-1:0]       in_j,
  input  logic [PW-1:0]       p1 [LANES],
  input  logic [PW-1:0]       p2 [LANES],
  input  logic                adc_ovr,
  output logic [1:0]          led_l1,
  output logic [1:0]          led_l2,
  output logic                acc_done,
  // host side
  input  logic                pci_clk,
  input  logic                pci_rst_n,
  input  logic                rd_en,
  input  logic [JW+1:0]       rd_bin,
  output logic [ACC_W-1:0]    rd_data,
  input  logic                release_buf,
  output logic                spec_ready,
  output logic                spec_adc_ovr,
  output logic                spec_acc_ovf,
  output logic [31:0]         spec_gaps
);
  localparam int unsigned Q = 1 << JW;

  logic run_s;
  sync_2ff u_sync_run (.clk(clk), .rst_n(rst_n), .d(run), .q(run_s));

  logic [ACC_W-1:0] acc  [LANES][Q];
  logic [ACC_W-1:0] obuf [LANES][Q];

  // ---- pass control ------------------------------------------------------
  logic        active;                 // inside an accumulation
  logic [31:0] pass_cnt, nb_lat;
  logic        pass_en_q, first_q, last_q, wr_ob_q;
  logic        obuf_full;
  logic        adc_flag, ovf_flag;     // sticky flags of the running accumulation
  logic        last_adc, last_ovf, have_last;
  logic [31:0] gaps;                   // accumulations not stored so far

  logic        sop, eop, begin_acc;
  logic [31:0] nb_eff, use_cnt, use_nb;
  logic        pass_en, first, last, wr_ob;

  assign nb_eff    = (n_blocks == '0) ? 32'd1 : n_blocks;
  assign sop       = in_valid && in_j == '0;
  assign eop       = in_valid && in_j == JW'(Q - 1);
  assign begin_acc = sop && run_s && !active;
  assign use_cnt   = begin_acc ? '0 : pass_cnt;
  assign use_nb    = begin_acc ? nb_eff : nb_lat;

  always_comb begin
    if (sop) begin
      pass_en = run_s;                        // a running accumulation stops with run
      first   = use_cnt == '0;
      last    = use_cnt == use_nb - 1;
      wr_ob   = last && !obuf_full;
    end else begin
      pass_en = pass_en_q;
      first   = first_q;
      last    = last_q;
      wr_ob   = wr_ob_q;
    end
  end

  // ---- accumulate --------------------------------------------------------
  logic [JW-1:0]    addr [LANES];
  logic [ACC_W-1:0] nsum [LANES];
  logic             sat_any;

  always_comb begin
    sat_any = 1'b0;
    for (int b = 0; b < int'(LANES); b++) begin
      logic [ACC_W:0] s;
      addr[b] = (b < 2) ? in_j : JW'(0) - in_j;
      s = (ACC_W+1)'(p1[b]) + (ACC_W+1)'(p2[b]);
      if (!first) s = s + (ACC_W+1)'(acc[b][addr[b]]);
      if (s[ACC_W]) begin
        nsum[b] = '1;
        sat_any = 1'b1;
      end else begin
        nsum[b] = s[ACC_W-1:0];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && pass_en) begin
      for (int b = 0; b < int'(LANES); b++) begin
        acc[b][addr[b]] <= nsum[b];
        if (wr_ob) obuf[b][addr[b]] <= nsum[b];
      end
    end
  end

  // ---- handshake with the host side ---------------------------------------
  logic rel_req_pci, rel_req_s, full_s;
  sync_2ff u_sync_rel (.clk(clk), .rst_n(rst_n), .d(rel_req_pci), .q(rel_req_s));
  sync_2ff u_sync_full (.clk(pci_clk), .rst_n(pci_rst_n), .d(obuf_full), .q(full_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      pass_cnt     <= '0;
      nb_lat       <= 32'd1;
      pass_en_q    <= 1'b0;
      first_q      <= 1'b0;
      last_q       <= 1'b0;
      wr_ob_q      <= 1'b0;
      obuf_full    <= 1'b0;
      adc_flag     <= 1'b0;
      ovf_flag     <= 1'b0;
      last_adc     <= 1'b0;
      last_ovf     <= 1'b0;
      have_last    <= 1'b0;
      spec_adc_ovr <= 1'b0;
      spec_acc_ovf <= 1'b0;
      spec_gaps    <= '0;
      gaps         <= '0;
      acc_done     <= 1'b0;
    end else begin
      acc_done <= 1'b0;
      if (rel_req_s) obuf_full <= 1'b0;
      if (sop) begin
        pass_en_q <= pass_en;
        first_q   <= first;
        last_q    <= last;
        wr_ob_q   <= wr_ob;
        if (begin_acc) begin
          active   <= 1'b1;
          pass_cnt <= '0;
          nb_lat   <= nb_eff;
        end else if (active && !run_s) begin
          active   <= 1'b0;                  // abandoned
        end
      end
      // flags of the running accumulation (cleared as it begins)
      if (begin_acc) begin
        adc_flag <= adc_ovr;
        ovf_flag <= sat_any;
      end else begin
        if (adc_ovr)                       adc_flag <= 1'b1;
        if (in_valid && pass_en && sat_any) ovf_flag <= 1'b1;
      end
      if (eop && pass_en) begin
        if (last) begin
          active    <= 1'b0;
          acc_done  <= 1'b1;
          have_last <= 1'b1;
          last_adc  <= adc_flag || adc_ovr;
          last_ovf  <= ovf_flag || sat_any;
          if (wr_ob) begin
            obuf_full    <= 1'b1;
            spec_adc_ovr <= adc_flag || adc_ovr;
            spec_acc_ovf <= ovf_flag || sat_any;
            spec_gaps    <= gaps;
          end else begin
            gaps         <= gaps + 1'b1;
          end
        end else begin
          pass_cnt <= pass_cnt + 1'b1;
        end
      end
      if (!run_s) have_last <= 1'b0;
    end
  end

  assign led_l1 = !(run_s && have_last) ? 2'b00 : (last_adc ? 2'b10 : 2'b01);
  assign led_l2 = !(run_s && have_last) ? 2'b00 : (last_ovf ? 2'b10 : 2'b01);

  // ---- host side ---------------------------------------------------------
  always_ff @(posedge pci_clk or negedge pci_rst_n) begin
    if (!pci_rst_n)        rel_req_pci <= 1'b0;
    else if (release_buf)  rel_req_pci <= 1'b1;
    else if (!full_s)      rel_req_pci <= 1'b0;
  end
  assign spec_ready = full_s && !rel_req_pci;

  always_ff @(posedge pci_clk) begin
    if (rd_en) rd_data <= obuf[rd_bin[JW+1:JW]][rd_bin[JW-1:0]];
  end

endmodule
