// One radix-4 decimation-in-frequency stage of the pipelined FFT.
//
// Each enabled cycle the stage takes the four butterfly inputs
// x[p] = a[m + p*L/4] (p = 0..3) of one length-L sub-transform, with
// L = 4**(LOG4_NC-STAGE), and produces
//     z[q] = W_L^(q*m) * sum_p x[p] * (-j)^(p*q),     q = 0..3,
// where m = t mod (L/4) is taken from the time index t that travels with the
// data. The four outputs are the q-th length-L/4 sub-sequences, which the
// following commutator regroups for the next stage.
//
// Word width: the input fits stage_width(STAGE) bits and the output is
// rounded by stage_shift(STAGE) bits and saturated to stage_width(STAGE+1)
// bits (carried sign-extended in 18-bit words). Twiddles are Q1.16 from a
// table of L entries. Timing: two enabled cycles of latency
// (butterfly + twiddle read, then complex multiply and rounding); t_out is
// the time index of the data on z. Radix 4 and the stored twiddles follow the
// paper; the stage pipeline and rounding are this design's choice.
module r4_stage
  import fft_pkg::*;
#(
  parameter int unsigned LOG4_NC = LOG4_NC_DEFAULT,
  parameter int unsigned STAGE   = 0,
  parameter int unsigned TW      = 2 * LOG4_NC - 2   // time index width, Q = 4**(LOG4_NC-1)
) (
  input  logic          clk,
  input  logic          en,
  input  cplx_t         x     [LANES],
  input  logic [TW-1:0] t_in,
  output cplx_t         z     [LANES],
  output logic [TW-1:0] t_out
);
  localparam int unsigned L     = 4 ** (LOG4_NC - STAGE);
  localparam int unsigned MBITS = 2 * (LOG4_NC - 1 - STAGE);   // bits of m
  localparam int unsigned AW    = 2 * (LOG4_NC - STAGE);       // log2(L)
  localparam int unsigned WOUT  = stage_width(STAGE + 1);
  localparam int unsigned SH    = stage_shift(STAGE);

  typedef struct packed {
    logic signed [DW+1:0] re;
    logic signed [DW+1:0] im;
  } wide_t;

  // time index bits of m
  logic [AW-1:0] m;
  if (MBITS == 0) begin : g_m0
    assign m = '0;
  end else begin : g_m
    assign m = AW'(t_in[MBITS-1:0]);
  end

  // twiddle addresses q*m (q = 1..3); q = 0 uses the entry of m = 0
  logic [AW-1:0] ta [LANES];
  twid_t         tw [LANES];
  always_comb begin
    for (int q = 0; q < int'(LANES); q++) ta[q] = AW'(q) * m;
  end

  twiddle_rom #(.CIRCLE(L), .DEPTH(L), .NPORT(LANES), .AW(AW)) u_rom (
    .clk(clk), .en(en), .addr(ta), .tw(tw)
  );

  // radix-4 butterfly, full precision (two guard bits)
  wide_t y_c [LANES];
  always_comb begin
    logic signed [DW+1:0] ar, ai, br, bi, cr, ci, dr, di;
    ar = (DW+2)'(x[0].re); ai = (DW+2)'(x[0].im);
    br = (DW+2)'(x[1].re); bi = (DW+2)'(x[1].im);
    cr = (DW+2)'(x[2].re); ci = (DW+2)'(x[2].im);
    dr = (DW+2)'(x[3].re); di = (DW+2)'(x[3].im);
    // y0 = a + b + c + d
    y_c[0].re = ar + br + cr + dr;  y_c[0].im = ai + bi + ci + di;
    // y1 = a - j b - c + j d
    y_c[1].re = ar + bi - cr - di;  y_c[1].im = ai - br - ci + dr;
    // y2 = a - b + c - d
    y_c[2].re = ar - br + cr - dr;  y_c[2].im = ai - bi + ci - di;
    // y3 = a + j b - c - j d
    y_c[3].re = ar - bi - cr + di;  y_c[3].im = ai + br - ci - dr;
  end

  wide_t         y_q [LANES];
  logic [TW-1:0] t_q;
  always_ff @(posedge clk) begin
    if (en) begin
      y_q <= y_c;
      t_q <= t_in;
    end
  end

  // complex multiply by the twiddle, round, saturate
  always_ff @(posedge clk) begin
    if (en) begin
      for (int q = 0; q < int'(LANES); q++) begin
        logic signed [47:0] pr, pi;
        pr = 48'(y_q[q].re) * 48'(tw[q].re) - 48'(y_q[q].im) * 48'(tw[q].im);
        pi = 48'(y_q[q].re) * 48'(tw[q].im) + 48'(y_q[q].im) * 48'(tw[q].re);
        z[q].re <= sat(rshift_round(pr, TW_FRAC + SH), WOUT);
        z[q].im <= sat(rshift_round(pi, TW_FRAC + SH), WOUT);
      end
      t_out <= t_q;
    end
  end
endmodule
