// Delay-commutator between radix-4 stage STAGE and STAGE+1 of the
// multi-path (4-lane) pipeline FFT.
//
// Stage STAGE delivers on lane q the q-th sub-sequence, one element per
// cycle; stage STAGE+1 needs, on its four lanes, four elements of one
// sub-sequence spaced D = 4**(LOG4_NC-2-STAGE) apart. Within each block of
// 4*D cycles this is a 4x4 transpose of D-element groups, done with a delay
// of q*D on input lane q, a rotating 4x4 switch that connects input lane
// (k - p) mod 4 to output lane p, k = floor(t/D) mod 4, and a delay of
// (3-p)*D on output lane p. The delays are clock-enabled RAM delay lines.
// Latency is 3*D enabled cycles; t_out = t_in - 3*D. The multi-path
// delay-commutator structure is this design's choice: the paper names a
// radix-4 pipeline with four complex streams but not its insides.
module r4_commutator
  import fft_pkg::*;
#(
  parameter int unsigned LOG4_NC = LOG4_NC_DEFAULT,
  parameter int unsigned STAGE   = 0,
  parameter int unsigned TW      = 2 * LOG4_NC - 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  cplx_t         x     [LANES],
  input  logic [TW-1:0] t_in,
  output cplx_t         z     [LANES],
  output logic [TW-1:0] t_out
);
  localparam int unsigned DB = 2 * (LOG4_NC - 2 - STAGE);   // log2(D)
  localparam int unsigned D  = 1 << DB;

  cplx_t a [LANES];   // after the input delays
  cplx_t b [LANES];   // after the switch

  // lane 0 has no input delay and lane 3 no output delay
  assign a[0] = x[0];
  assign z[3] = b[3];
  for (genvar i = 1; i < int'(LANES); i++) begin : g_pre
    delay_line #(.W($bits(cplx_t)), .DEPTH(i * D)) u_pre (
      .clk(clk), .rst_n(rst_n), .en(en), .din(x[i]), .dout(a[i])
    );
  end
  for (genvar i = 0; i < int'(LANES) - 1; i++) begin : g_post
    delay_line #(.W($bits(cplx_t)), .DEPTH((3 - i) * D)) u_post (
      .clk(clk), .rst_n(rst_n), .en(en), .din(b[i]), .dout(z[i])
    );
  end

  logic [1:0] k;
  assign k = t_in[DB +: 2];

  always_comb begin
    for (int p = 0; p < int'(LANES); p++) b[p] = a[2'(k - 2'(p))];
  end

  assign t_out = t_in - TW'(3 * D);
endmodule
