// Self-checking testbench of the input buffer at LOG4_NC = 3 (64 complex
// words per frame, Q = 16). It writes four frame pairs of random 9-bit
// samples, with an idle gap before the third pair, and checks that each pair
// comes out in Q consecutive cycles starting one cycle after its last
// write, with lane p at time t holding z[p*Q+t] of the first frame on
// pipeline 1 and of the second frame on pipeline 2.
module tb_input_buffer;
  import fft_pkg::*;

  localparam int unsigned S  = 3;
  localparam int unsigned TW = 2 * S - 2;
  localparam int unsigned Q  = 1 << TW;
  localparam int unsigned NC = 4 * Q;
  localparam int unsigned NP = 4;               // pairs

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, in_sof = 1'b0;
  logic signed [WIN_W-1:0] in_x [SPC];
  logic out_en, overflow;
  logic [TW-1:0] out_t;
  cplx_t out_a [LANES], out_b [LANES];

  input_buffer #(.LOG4_NC(S)) dut (.*);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  int xs [NP][2][2*NC];
  int ncyc = 0, pair_out = 0, t_exp = 0, last_write_cyc [NP], first_out_cyc [NP];
  int cyc = 0;

  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < int'(NP); p++)
      for (int f = 0; f < 2; f++)
        for (int n = 0; n < int'(2 * NC); n++) xs[p][f][n] = int'($urandom % 512) - 256;
    for (int l = 0; l < int'(SPC); l++) in_x[l] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int p = 0; p < int'(NP); p++) begin
      if (p == 2) begin
        in_valid <= 1'b0;
        repeat (7) @(posedge clk);
      end
      for (int f = 0; f < 2; f++)
        for (int c = 0; c < int'(2 * NC / SPC); c++) begin
          in_valid <= 1'b1;
          in_sof   <= (c == 0);
          for (int l = 0; l < int'(SPC); l++) in_x[l] <= WIN_W'(xs[p][f][SPC * c + l]);
          @(posedge clk);
          if (f == 1 && c == int'(2 * NC / SPC) - 1) last_write_cyc[p] = cyc;
        end
    end
    in_valid <= 1'b0;
    in_sof   <= 1'b0;
    repeat (3 * Q) @(posedge clk);
    checks++;
    if (pair_out != int'(NP)) begin
      failures++;
      $display("%0d pairs out, expected %0d", pair_out, NP);
    end
    for (int p = 0; p < int'(NP); p++) begin
      checks++;
      if (first_out_cyc[p] != last_write_cyc[p] + 2) begin
        failures++;
        $display("pair %0d out at %0d, last write %0d", p, first_out_cyc[p], last_write_cyc[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (overflow) begin
      failures++;
      $display("unexpected overflow");
    end
    if (out_en) begin
      if (t_exp == 0) first_out_cyc[pair_out] = cyc - 1;
      checks++;
      if (int'(out_t) != t_exp) begin
        failures++;
        $display("out_t %0d expected %0d", out_t, t_exp);
      end
      for (int p = 0; p < int'(LANES); p++) begin
        int n;
        n = p * int'(Q) + t_exp;
        checks++;
        if (int'(out_a[p].re) != xs[pair_out][0][2*n] || int'(out_a[p].im) != xs[pair_out][0][2*n+1] ||
            int'(out_b[p].re) != xs[pair_out][1][2*n] || int'(out_b[p].im) != xs[pair_out][1][2*n+1]) begin
          failures++;
          if (failures < 10) $display("pair %0d t %0d lane %0d mismatch: a=%0d,%0d b=%0d,%0d exp a=%0d,%0d", pair_out, t_exp, p, out_a[p].re, out_a[p].im, out_b[p].re, out_b[p].im, xs[pair_out][0][2*n], xs[pair_out][0][2*n+1]);
        end
      end
      t_exp++;
      if (t_exp == int'(Q)) begin
        t_exp = 0;
        pair_out++;
      end
    end else if (t_exp != 0) begin
      failures++;
      $display("output stalled inside a pair");
      t_exp = 0;
    end
  end
endmodule
