// One FFT pipeline of the spectrometer: the N = 2*4**LOG4_NC point FFT of a
// real frame (32768 samples by default), fed as NC = 4**LOG4_NC complex
// pairs z[n] = x[2n] + j*x[2n+1] on four lanes.
//
// Structure: LOG4_NC radix-4 DIF stages (r4_stage) joined by
// delay-commutators (r4_commutator), giving the NC-point complex FFT in
// digit-reversed order, then the real-input split stage (real_split) that
// yields bins 0..N/2-1 of the real transform. Everything advances only on
// enabled cycles (en), so the pipeline holds its state while the clock
// enable is low, as the paper allows the processing clock to be stopped.
//
// Interface: each enabled cycle the four lanes carry x[p] = z[p*Q + t],
// p = 0..3, Q = NC/4, for t = t_in = 0..Q-1 (one frame per Q cycles; the
// first enabled cycle after reset must have t_in = 0). out_valid marks
// enabled cycles with valid bins; lane b then holds X[k]/2**(1+S) where
// k = b*Q + (b < 2 ? out_j : (-out_j mod Q)) and S is the sum of the stage
// shifts (fft_pkg::stage_shift). The first valid output appears LATENCY
// enabled cycles after the first input, i.e. one frame plus the
// commutator and stage delays; after that, one frame per Q enabled cycles,
// i.e. 4 complex inputs and 4 bins per cycle.
module fft_pipeline
  import fft_pkg::*;
#(
  parameter int unsigned LOG4_NC = LOG4_NC_DEFAULT,
  parameter int unsigned TW      = 2 * LOG4_NC - 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  cplx_t         x_in  [LANES],
  input  logic [TW-1:0] t_in,
  output logic          out_valid,
  output cplx_t         x_out [LANES],
  output logic [TW-1:0] out_j
);
  localparam int unsigned S = LOG4_NC;
  localparam int unsigned Q = 1 << TW;

  function automatic int unsigned comm_latency();
    int unsigned acc;
    acc = 0;
    for (int unsigned s = 0; s + 1 < S; s++) acc += 3 * (1 << (2 * (S - 2 - s)));
    return acc;
  endfunction

  localparam int unsigned LATENCY = 2 * S + comm_latency() + Q + 2;

  cplx_t         sd [S+1][LANES];   // stage inputs
  logic [TW-1:0] st [S+1];
  cplx_t         so [S][LANES];     // stage outputs
  logic [TW-1:0] sot [S];

  assign sd[0] = x_in;
  assign st[0] = t_in;

  for (genvar s = 0; s < int'(S); s++) begin : g_stage
    r4_stage #(.LOG4_NC(S), .STAGE(s), .TW(TW)) u_stage (
      .clk(clk), .en(en), .x(sd[s]), .t_in(st[s]), .z(so[s]), .t_out(sot[s])
    );
    if (s + 1 < S) begin : g_comm
      r4_commutator #(.LOG4_NC(S), .STAGE(s), .TW(TW)) u_comm (
        .clk(clk), .rst_n(rst_n), .en(en), .x(so[s]), .t_in(sot[s]),
        .z(sd[s+1]), .t_out(st[s+1])
      );
    end else begin : g_last
      assign sd[s+1] = so[s];
      assign st[s+1] = sot[s];
    end
  end

  real_split #(.LOG4_NC(S), .TW(TW)) u_split (
    .clk(clk), .rst_n(rst_n), .en(en), .x(sd[S]), .t_in(st[S]),
    .xo(x_out), .out_j(out_j)
  );

  // valid once the first frame has passed through
  logic [$clog2(LATENCY+1)-1:0] cnt;
  logic                         primed;
  assign primed = (cnt == ($clog2(LATENCY+1))'(LATENCY));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             cnt <= '0;
    else if (en && !primed) cnt <= cnt + 1'b1;
  end
  assign out_valid = en && primed;

  // the first input after reset starts a frame
  a_first_frame: assert property (@(posedge clk) disable iff (!rst_n)
    (en && cnt == '0) |-> (t_in == '0));
endmodule
