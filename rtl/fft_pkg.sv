// Shared constants, types and helper functions of the FFT spectrometer.
//
// The number formats follow the data path of the spectrometer: 8-bit ADC
// samples, 9-bit windowed samples, 18-bit complex words inside the FFT
// pipelines (the width of the FPGA's 18x18 multipliers), 34-bit power values
// and 36-bit accumulated bins. All of these widths are the paper's numbers.
// The per-stage growth rule (stage_width) and the twiddle format (Q1.16) are
// this design's own choices.
package fft_pkg;

  localparam int unsigned ADC_W    = 8;   // ADC resolution
  localparam int unsigned ADC_WORDS = 16; // words per ADC channel per 62.5 MHz cycle
  localparam int unsigned SPC      = 16;  // real samples per 125 MHz cycle
  localparam int unsigned WIN_W    = 9;   // window coefficient and windowed sample
  localparam int unsigned DW       = 18;  // complex component width in the pipeline
  localparam int unsigned TW_W     = 18;  // twiddle factor component width
  localparam int unsigned TW_FRAC  = 16;  // twiddle fraction bits, 1.0 = 2**16
  localparam int unsigned PW       = 34;  // power spectrum width
  localparam int unsigned ACC_W    = 36;  // accumulator width
  localparam int unsigned LANES    = 4;   // complex streams per pipeline
  localparam int unsigned CPC      = 8;   // complex pairs per 125 MHz cycle

  // Default FFT size: 4**7 = 16384 complex points = 32768 real samples.
  localparam int unsigned LOG4_NC_DEFAULT = 7;

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [TW_W-1:0] re;
    logic signed [TW_W-1:0] im;
  } twid_t;

  // Word width of the data entering radix-4 stage s: 9 bits at the input,
  // two bits more after each stage (the full growth of a radix-4 butterfly)
  // until the 18-bit limit is reached.
  function automatic int unsigned stage_width(int unsigned s);
    return (WIN_W + 2 * s > DW) ? DW : WIN_W + 2 * s;
  endfunction

  // Right shift applied at the output of stage s.
  function automatic int unsigned stage_shift(int unsigned s);
    return stage_width(s) + 2 - stage_width(s + 1);
  endfunction

  // Saturate a wide signed value to w bits (w <= DW), result sign-extended to DW.
  function automatic logic signed [DW-1:0] sat(logic signed [47:0] v, int unsigned w);
    logic signed [47:0] hi, lo;
    hi = (48'sd1 <<< (w - 1)) - 48'sd1;
    lo = -(48'sd1 <<< (w - 1));
    if (v > hi)      return DW'(hi);
    else if (v < lo) return DW'(lo);
    else             return DW'(v);
  endfunction

  // Arithmetic right shift by sh with round-half-up.
  function automatic logic signed [47:0] rshift_round(logic signed [47:0] v, int unsigned sh);
    if (sh == 0) return v;
    return (v + (48'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  // Base-4 digit reversal of an index of ndig digits.
  function automatic logic [31:0] digit_rev4(logic [31:0] x, int unsigned ndig);
    logic [31:0] r;
    r = '0;
    for (int unsigned d = 0; d < ndig; d++) r[2*d +: 2] = x[2*(ndig-1-d) +: 2];
    return r;
  endfunction

endpackage
