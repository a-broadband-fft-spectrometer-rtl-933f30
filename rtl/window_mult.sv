// Window multiplication at the front of the spectrometer.
//
// The two interleaved ADC channels deliver 2 x 16 8-bit words per 62.5 MHz
// cycle (2 Gsample/s); this design carries the 62.5 MHz rate as the strobe
// adc_valid in the 125 MHz clk domain, at most every second clk cycle. Each
// accepted word is split over two clk cycles into 16 consecutive samples
// (gearbox), so the output runs at 125 MHz with 16 samples per cycle.
// Sample order: channel A holds the even and channel B the odd samples, so
// sample 2i of the 32 is adc_a[i] and sample 2i+1 is adc_b[i].
//
// Every sample of an N-sample frame (N = 2*4**LOG4_NC = 32768) is then
// multiplied by a symmetric 9-bit window w[n] = w[N-1-n]; only the first
// half, N/2 coefficients, is stored, in 16 banks (bank = n mod 16) so that
// 16 coefficients are read per cycle, mirrored in the second half of the
// frame. Coefficients are unsigned, value w/512, and the output is
// round(x*w/256), 9 bits. With win_en = 0 the window is bypassed
// (unfiltered, equal to a boxcar) and the output is 2*x. The coefficient
// table is written from the host clock domain (coef_clk) and should be
// loaded while the window is bypassed or the input stopped.
//
// adc_ovr pulses for a word holding a sample at either end of the ADC
// range (-128 or +127), the condition the front-panel LED L1 shows.
// out_sof marks the first cycle of each frame. Latency: 3 clk cycles from
// the strobe to the first half of a word.
//
// From the paper: 8-bit input, 9-bit symmetric window, optional, boxcar or a
// table (Kaiser), 9-bit output, 2x16 words at 62.5 MHz becoming 16 samples
// at 125 MHz. This design's choices: the sample order, the coefficient
// scale, the rounding, bypass = 2*x, and the host-loaded table.
module window_mult
  import fft_pkg::*;
#(
  parameter int unsigned LOG4_NC = LOG4_NC_DEFAULT,
  parameter int unsigned CAW     = 2 * LOG4_NC        // log2(N/2), coefficient address
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           adc_valid,
  input  logic signed [ADC_W-1:0]        adc_a [ADC_WORDS],
  input  logic signed [ADC_W-1:0]        adc_b [ADC_WORDS],
  input  logic                           win_en,
  input  logic                           coef_clk,
  input  logic                           coef_we,
  input  logic [CAW-1:0]                 coef_addr,
  input  logic [WIN_W-1:0]               coef_data,
  output logic                           out_valid,
  output logic                           out_sof,
  output logic signed [WIN_W-1:0]        out_x [SPC],
  output logic                           adc_ovr
);
  localparam int unsigned FCB = CAW - 3;       // log2(cycles per frame) = log2(N/16)
  localparam int unsigned FC  = 1 << FCB;      // cycles per frame
  localparam int unsigned BD  = FC / 2;        // depth of a coefficient bank
  localparam int unsigned BAW = FCB - 1;

  // ---- gearbox -----------------------------------------------------------
  logic signed [ADC_W-1:0] hold_hi [SPC];
  logic                    pend;
  logic                    s0_valid;
  logic signed [ADC_W-1:0] s0_x [SPC];
  logic [FCB-1:0]          fc;                 // frame cycle of the data entering s0

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= 1'b0;
      s0_valid <= 1'b0;
      adc_ovr  <= 1'b0;
    end else begin
      s0_valid <= adc_valid || pend;
      pend     <= adc_valid;
      adc_ovr  <= 1'b0;
      if (adc_valid)
        for (int i = 0; i < int'(ADC_WORDS); i++)
          if (adc_a[i] == -8'sd128 || adc_a[i] == 8'sd127 ||
              adc_b[i] == -8'sd128 || adc_b[i] == 8'sd127) adc_ovr <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (adc_valid) begin
      for (int i = 0; i < int'(SPC) / 2; i++) begin
        s0_x[2*i]       <= adc_a[i];
        s0_x[2*i+1]     <= adc_b[i];
        hold_hi[2*i]    <= adc_a[i + SPC/2];
        hold_hi[2*i+1]  <= adc_b[i + SPC/2];
      end
    end else if (pend) begin
      s0_x <= hold_hi;
    end
  end

  a_rate: assert property (@(posedge clk) disable iff (!rst_n) adc_valid |-> !pend);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        fc <= '0;
    else if (s0_valid) fc <= fc + 1'b1;
  end

  // ---- coefficient table -------------------------------------------------
  logic [WIN_W-1:0] bank [SPC][BD];

  always_ff @(posedge coef_clk) begin
    if (coef_we) bank[coef_addr[3:0]][coef_addr[CAW-1:4]] <= coef_data;
  end

  logic           second;     // second half of the frame: mirrored read
  logic [BAW-1:0] raddr;
  assign second = fc[FCB-1];
  assign raddr  = second ? ~fc[BAW-1:0] : fc[BAW-1:0];

  logic                    s1_valid, s1_sof;
  logic signed [ADC_W-1:0] s1_x [SPC];
  logic [WIN_W-1:0]        s1_w [SPC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_sof   <= 1'b0;
    end else begin
      s1_valid <= s0_valid;
      s1_sof   <= s0_valid && fc == '0;
    end
  end

  always_ff @(posedge clk) begin
    if (s0_valid) begin
      s1_x <= s0_x;
      for (int l = 0; l < int'(SPC); l++)
        s1_w[l] <= second ? bank[SPC-1-l][raddr] : bank[l][raddr];
    end
  end

  // ---- multiply ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      out_valid <= s1_valid;
      out_sof   <= s1_sof;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      for (int l = 0; l < int'(SPC); l++) begin
        logic signed [18:0] prod;
        prod = 19'(s1_x[l]) * $signed({10'b0, s1_w[l]}) + 19'sd128;
        out_x[l] <= win_en ? WIN_W'(prod >>> 8) : {s1_x[l], 1'b0};
      end
    end
  end
endmodule
