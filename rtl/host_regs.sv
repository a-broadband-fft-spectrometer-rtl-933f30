// Host register file on the local bus behind the PCI interface core, in the
// host clock domain (pci_clk). Word addresses, 32-bit data:
//   region addr[17:16] = 0: registers
//     0 CTRL     rw  bit0 run, bit1 window on (0 = unfiltered), bit2 36-bit readout
//     1 NBLOCKS  rw  accumulation length in passes of two spectra
//     2 STATUS   r   bit0 spectrum ready, bit1 ADC saturated, bit2 accumulation
//                    overflow (both of the stored spectrum)
//     3 RELEASE  w   any write frees the output buffer for the next spectrum
//     4 DOUT     rw  8 digital outputs
//     5 DIN      r   6 digital inputs (synchronised)
//     6 GAPS     r   accumulations lost before the stored spectrum
//   region 1: window table, write only, address = coefficient index, data[8:0]
//   region 2: spectrum, read only. 32-bit readout: address = bin, data =
//     bits 35:4 of the sum. 36-bit readout: address = 2*bin + w, w = 0 gives
//     bits 31:0, w = 1 gives bits 35:32 in data[3:0].
// A read (bus_rd) returns bus_rdata with bus_rvalid one cycle later; writes
// take effect at the clock edge. Reset clears all registers (run off,
// window off, NBLOCKS = 1, outputs low).
//
// From the paper: 6 digital inputs and 8 outputs readable and writable by
// the PC, a selectable 32 or 36 bits of the accumulated spectrum, the
// accumulation count, window choice and start/stop set by the PC. The
// address map, bit positions and which 32 of the 36 bits are returned are
// this design's choices.
module host_regs
  import fft_pkg::*;
#(
  parameter int unsigned CAW = 2 * LOG4_NC_DEFAULT,      // window table address width
  parameter int unsigned JW  = 2 * LOG4_NC_DEFAULT - 2   // log2(bins/4)
) (
  input  logic              pci_clk,
  input  logic              pci_rst_n,
  // local bus
  input  logic              bus_wr,
  input  logic              bus_rd,
  input  logic [17:0]       bus_addr,
  input  logic [31:0]       bus_wdata,
  output logic [31:0]       bus_rdata,
  output logic              bus_rvalid,
  // configuration
  output logic              run,
  output logic              win_en,
  output logic [31:0]       n_blocks,
  output logic              coef_we,
  output logic [CAW-1:0]    coef_addr,
  output logic [WIN_W-1:0]  coef_data,
  // spectrum readout
  output logic              spec_rd_en,
  output logic [JW+1:0]     spec_rd_bin,
  input  logic [ACC_W-1:0]  spec_rd_data,
  output logic              release_buf,
  input  logic              spec_ready,
  input  logic              spec_adc_ovr,
  input  logic              spec_acc_ovf,
  input  logic [31:0]       spec_gaps,
  // front-panel digital I/O
  input  logic [5:0]        din,
  output logic [7:0]        dout
);
  typedef enum logic [1:0] { R_REGS = 2'd0, R_WIN = 2'd1, R_SPEC = 2'd2, R_NONE = 2'd3 } region_e;

  region_e region;
  assign region = region_e'(bus_addr[17:16]);

  // registers decode the full low half-word, so they do not alias
  logic reg_hit;
  assign reg_hit = region == R_REGS && bus_addr[15:4] == '0;

  logic width36;
  logic [5:0] din_m, din_s;

  always_ff @(posedge pci_clk or negedge pci_rst_n) begin
    if (!pci_rst_n) begin
      din_m <= '0;
      din_s <= '0;
    end else begin
      din_m <= din;
      din_s <= din_m;
    end
  end

  // writes
  always_ff @(posedge pci_clk or negedge pci_rst_n) begin
    if (!pci_rst_n) begin
      run         <= 1'b0;
      win_en      <= 1'b0;
      width36     <= 1'b0;
      n_blocks    <= 32'd1;
      dout        <= '0;
      release_buf <= 1'b0;
      coef_we     <= 1'b0;
      coef_addr   <= '0;
      coef_data   <= '0;
    end else begin
      release_buf <= 1'b0;
      coef_we     <= 1'b0;
      if (bus_wr && reg_hit) begin
        unique case (bus_addr[3:0])
          4'd0: {width36, win_en, run} <= bus_wdata[2:0];
          4'd1: n_blocks               <= bus_wdata;
          4'd3: release_buf            <= 1'b1;
          4'd4: dout                   <= bus_wdata[7:0];
          default: ;
        endcase
      end
      if (bus_wr && region == R_WIN) begin
        coef_we   <= 1'b1;
        coef_addr <= bus_addr[CAW-1:0];
        coef_data <= bus_wdata[WIN_W-1:0];
      end
    end
  end

  // spectrum read address goes straight to the output buffer
  assign spec_rd_en  = bus_rd && region == R_SPEC;
  assign spec_rd_bin = width36 ? bus_addr[JW+2:1] : bus_addr[JW+1:0];

  // reads
  logic [31:0] reg_q;
  region_e     region_q;
  logic        hi_q, w36_q;

  always_ff @(posedge pci_clk or negedge pci_rst_n) begin
    if (!pci_rst_n) begin
      bus_rvalid <= 1'b0;
      region_q   <= R_NONE;
      hi_q       <= 1'b0;
      w36_q      <= 1'b0;
      reg_q      <= '0;
    end else begin
      bus_rvalid <= bus_rd;
      if (bus_rd) begin
        region_q <= region;
        hi_q     <= bus_addr[0];
        w36_q    <= width36;
        if (!reg_hit) reg_q <= '0;
        else unique case (bus_addr[3:0])
          4'd0:    reg_q <= {29'd0, width36, win_en, run};
          4'd1:    reg_q <= n_blocks;
          4'd2:    reg_q <= {29'd0, spec_acc_ovf, spec_adc_ovr, spec_ready};
          4'd4:    reg_q <= {24'd0, dout};
          4'd5:    reg_q <= {26'd0, din_s};
          4'd6:    reg_q <= spec_gaps;
          default: reg_q <= '0;
        endcase
      end
    end
  end

  always_comb begin
    if (region_q == R_SPEC) begin
      if (!w36_q)    bus_rdata = spec_rd_data[ACC_W-1:4];
      else if (hi_q) bus_rdata = {28'd0, spec_rd_data[ACC_W-1:32]};
      else           bus_rdata = spec_rd_data[31:0];
    end else if (region_q == R_REGS) begin
      bus_rdata = reg_q;
    end else begin
      bus_rdata = '0;
    end
  end
endmodule
