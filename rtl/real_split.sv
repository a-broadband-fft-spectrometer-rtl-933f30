// Real-input split stage: turns the N/2-point complex FFT Z of the packed
// sequence z[n] = x[2n] + j*x[2n+1] into the N-point FFT X of the real
// samples x, N = 2*NC, NC = 4**LOG4_NC:
//     X[k] = ( Z[k] + conj(Z[NC-k]) )/2 - j/2 * W_N^k * ( Z[k] - conj(Z[NC-k]) ).
// The output is X[k]/2 (one bit of scaling to stay in 18 bits), saturated.
//
// The last radix-4 stage delivers Z in base-4 digit-reversed order: lane l
// at time t holds Z[l*Q + rev(t)], Q = NC/4. Each lane is written into its
// own bank of a two-frame (ping-pong) buffer at address rev(t). While one
// frame is written, the previous one is read: at read index j the four
// banks are read at j, j, -j, -j (mod Q), which gives the four bins
//     k_b = b*Q + (b < 2 ? j : (-j mod Q)),  b = 0..3,
// and each of them finds its partner Z[NC-k_b] among the same four words.
// So four bins per cycle leave the stage with one read per bank per cycle,
// bins 0..NC-1 once per frame. Timing: one frame of buffering plus two
// enabled cycles; out_j is the read index j of the bins on xo.
// The algorithm is the one the paper cites (N-point FFT from an N/2-point
// transform plus a twiddle stage); the buffer organisation is this design's.
module real_split
  import fft_pkg::*;
#(
  parameter int unsigned LOG4_NC = LOG4_NC_DEFAULT,
  parameter int unsigned TW      = 2 * LOG4_NC - 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  cplx_t         x     [LANES],
  input  logic [TW-1:0] t_in,
  output cplx_t         xo    [LANES],
  output logic [TW-1:0] out_j
);
  localparam int unsigned Q  = 1 << TW;
  localparam int unsigned NC = 4 * Q;
  localparam int unsigned KW = TW + 2;

  cplx_t fbuf [2][LANES][Q];
  logic  wsel;

  logic [TW-1:0] wa;
  assign wa = TW'(digit_rev4(32'(t_in), LOG4_NC - 1));

  always_ff @(posedge clk) begin
    if (en) for (int l = 0; l < int'(LANES); l++) fbuf[wsel][l][wa] <= x[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         wsel <= 1'b0;
    else if (en && t_in == TW'(Q - 1))  wsel <= ~wsel;
  end

  // read side: the frame written during the previous Q cycles
  logic [TW-1:0] j, jn;
  assign j  = t_in;
  assign jn = TW'(0) - j;

  cplx_t zr [LANES];
  always_comb begin
    zr[0] = fbuf[~wsel][0][j];
    zr[1] = fbuf[~wsel][1][j];
    zr[2] = fbuf[~wsel][2][jn];
    zr[3] = fbuf[~wsel][3][jn];
  end

  // twiddles W_N^k for the four bins
  logic [KW-1:0] ka [LANES];
  twid_t         tw [LANES];
  always_comb begin
    for (int b = 0; b < int'(LANES); b++) ka[b] = {2'(b), (b < 2) ? j : jn};
  end
  twiddle_rom #(.CIRCLE(2 * NC), .DEPTH(NC), .NPORT(LANES), .AW(KW)) u_rom (
    .clk(clk), .en(en), .addr(ka), .tw(tw)
  );

  cplx_t         zk [LANES];
  cplx_t         zp [LANES];
  logic [TW-1:0] j_q;
  always_ff @(posedge clk) begin
    if (en) begin
      zk <= zr;
      if (j == '0) begin
        zp[0] <= zr[0]; zp[1] <= zr[3]; zp[2] <= zr[2]; zp[3] <= zr[1];
      end else begin
        zp[0] <= zr[3]; zp[1] <= zr[2]; zp[2] <= zr[1]; zp[3] <= zr[0];
      end
      j_q <= j;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int b = 0; b < int'(LANES); b++) begin
        logic signed [47:0] sr, si, er, ei, xr, xi;
        sr = 48'(zk[b].re) + 48'(zp[b].re);
        si = 48'(zk[b].im) - 48'(zp[b].im);
        er = 48'(zk[b].im) + 48'(zp[b].im);
        ei = 48'(zp[b].re) - 48'(zk[b].re);
        xr = (sr <<< TW_FRAC) + 48'(tw[b].re) * er - 48'(tw[b].im) * ei;
        xi = (si <<< TW_FRAC) + 48'(tw[b].re) * ei + 48'(tw[b].im) * er;
        xo[b].re <= sat(rshift_round(xr, TW_FRAC + 2), DW);
        xo[b].im <= sat(rshift_round(xi, TW_FRAC + 2), DW);
      end
      out_j <= j_q;
    end
  end
endmodule
