// Input buffer between the window and the two FFT pipelines.
//
// The windowed stream arrives as 16 real samples per 125 MHz cycle. Each
// even/odd pair is taken as one complex word z[n] = x[2n] + j*x[2n+1], so a
// frame of N = 2*NC real samples is NC complex words (NC = 4**LOG4_NC) and
// takes Q/2 cycles, Q = NC/4. Two consecutive frames form a pair: the first
// goes to pipeline 1 (out_a) and the second to pipeline 2 (out_b). A pair is
// written in Q cycles into one of two slots (ping-pong); a full slot is read
// out in Q cycles to both pipelines at once, four complex words per
// pipeline per cycle, in the order the first radix-4 stage needs:
// lane p at time t carries z[p*Q + t]. So both pipelines run in lock step at
// half the input rate each and the pair leaves the buffer as fast as it
// arrives. Each frame lives in four quarter banks of Q/8 words of 8 complex
// values, written one word per cycle and read one value per bank per cycle.
//
// in_sof re-aligns the write position to the start of a pair if it comes
// anywhere but at a frame start. overflow pulses if a pair arrives for a
// slot that is still full (cannot happen while the output runs without
// stalls). Output timing: out_en rises the cycle after the pair's last write.
//
// From the paper: the input buffer, complex pairs from even/odd samples,
// two pipelines with four complex streams each. This design's choices: the
// pairing of alternate frames to the two pipelines (which matches the
// paper's minimum on-board accumulation of two spectra, 32.768 us) and the
// buffer organisation.
module input_buffer
  import fft_pkg::*;
#(
  parameter int unsigned LOG4_NC = LOG4_NC_DEFAULT,
  parameter int unsigned TW      = 2 * LOG4_NC - 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_sof,
  input  logic signed [WIN_W-1:0]  in_x [SPC],
  output logic                     out_en,
  output logic [TW-1:0]            out_t,
  output cplx_t                    out_a [LANES],
  output cplx_t                    out_b [LANES],
  output logic                     overflow
);
  localparam int unsigned Q   = 1 << TW;
  localparam int unsigned QW  = Q / CPC;       // words per quarter bank
  localparam int unsigned WB  = TW - 3;        // log2(QW)
  localparam int unsigned CW  = 2 * WIN_W;     // one complex value
  localparam int unsigned EW  = CPC * CW;      // one word

  logic [EW-1:0] mem [2][2][LANES][QW];        // [slot][frame][quarter][word]
  logic [1:0]    full;
  logic          ws, rs;
  logic [TW-1:0] pc;                           // write cycle within the pair
  logic [TW-1:0] rt;                           // read time within the pair

  // write position; a misplaced frame start restarts the pair
  logic [TW-1:0] wpc;
  logic          wfr;
  logic [1:0]    wq;
  logic [WB-1:0] ww;
  always_comb begin
    wpc = (in_sof && pc[TW-2:0] != '0) ? '0 : pc;
    wfr = wpc[TW-1];
    wq  = wpc[TW-2 -: 2];
    ww  = wpc[WB-1:0];
  end

  logic [EW-1:0] wword;
  always_comb begin
    for (int i = 0; i < int'(CPC); i++)
      wword[i*CW +: CW] = {in_x[2*i+1], in_x[2*i]};   // {im, re}
  end

  logic wr_ok;
  assign wr_ok = in_valid && !full[ws];

  always_ff @(posedge clk) begin
    if (wr_ok) mem[ws][wfr][wq][ww] <= wword;
  end

  // read side
  logic [2:0]    rel;
  logic [WB-1:0] rw;
  assign rel = rt[2:0];
  assign rw  = rt[TW-1:3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full     <= '0;
      ws       <= 1'b0;
      rs       <= 1'b0;
      pc       <= '0;
      rt       <= '0;
      out_t    <= '0;
      out_en   <= 1'b0;
      overflow <= 1'b0;
    end else begin
      overflow <= in_valid && full[ws];
      if (wr_ok) begin
        pc <= wpc + 1'b1;
        if (wpc == TW'(Q - 1)) begin
          full[ws] <= 1'b1;
          ws       <= ~ws;
        end
      end
      out_en <= full[rs];
      if (full[rs]) begin
        out_t <= rt;
        rt    <= rt + 1'b1;
        if (rt == TW'(Q - 1)) begin
          full[rs] <= 1'b0;
          rs       <= ~rs;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (full[rs]) begin
      for (int p = 0; p < int'(LANES); p++) begin
        logic [EW-1:0] wa, wb;
        logic [CW-1:0] ca, cb;
        wa = mem[rs][0][p][rw];
        wb = mem[rs][1][p][rw];
        ca = wa[rel*CW +: CW];
        cb = wb[rel*CW +: CW];
        out_a[p].re <= {{(DW-WIN_W){ca[WIN_W-1]}}, ca[WIN_W-1:0]};
        out_a[p].im <= {{(DW-WIN_W){ca[CW-1]}}, ca[CW-1:WIN_W]};
        out_b[p].re <= {{(DW-WIN_W){cb[WIN_W-1]}}, cb[WIN_W-1:0]};
        out_b[p].im <= {{(DW-WIN_W){cb[CW-1]}}, cb[CW-1:WIN_W]};
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && full[ws]));
endmodule
