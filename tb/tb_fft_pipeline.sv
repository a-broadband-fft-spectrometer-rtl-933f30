// Self-checking testbench of one FFT pipeline at LOG4_NC = 4 (a 512-point
// real FFT, 64 cycles per frame). It feeds random 9-bit frames and one
// frame with a strong tone, with random cycles of clock enable low in the
// middle, and compares every output bin with a floating-point DFT of the
// same real samples, scaled as the pipeline scales. It also checks that the
// first valid bin comes exactly LATENCY enabled cycles after the first
// input and that, once primed, every enabled cycle carries four bins.
module tb_fft_pipeline;
  import fft_pkg::*;

  localparam int unsigned S   = 4;
  localparam int unsigned TW  = 2 * S - 2;
  localparam int unsigned Q   = 1 << TW;
  localparam int unsigned NC  = 4 * Q;
  localparam int unsigned N   = 2 * NC;
  localparam int unsigned NFR = 5;          // checked frames
  localparam int unsigned NFL = 3;          // flush frames
  localparam real         PI  = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  cplx_t x_in [LANES], x_out [LANES];
  logic [TW-1:0] t_in = '0, out_j;
  logic out_valid;

  fft_pipeline #(.LOG4_NC(S)) dut (.*);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  int xs [NFR+NFL][N];
  real ref_re [NFR][N/2], ref_im [NFR][N/2];
  real ctab [N], stab [N];
  real scale, maxerr = 0.0;
  int  en_cycles = 0, first_valid_at = -1, valid_cycles = 0;
  int  out_count = 0;

  function automatic int unsigned total_shift();
    int unsigned a;
    a = 1;
    for (int unsigned s = 0; s < S; s++) a += stage_shift(s);
    return a;
  endfunction

  initial begin
    scale = real'(1 << total_shift());
    for (int n = 0; n < int'(N); n++) begin
      ctab[n] = $cos(2.0 * PI * n / N);
      stab[n] = $sin(2.0 * PI * n / N);
    end
    for (int f = 0; f < int'(NFR + NFL); f++)
      for (int n = 0; n < int'(N); n++) begin
        if (f == 2) xs[f][n] = $rtoi(200.0 * $cos(2.0 * PI * 37.0 * n / N)) + ($urandom % 21) - 10;
        else        xs[f][n] = int'($urandom % 511) - 255;
      end
    for (int f = 0; f < int'(NFR); f++)
      for (int k = 0; k < int'(N / 2); k++) begin
        real ar, ai;
        ar = 0.0; ai = 0.0;
        for (int n = 0; n < int'(N); n++) begin
          ar += xs[f][n] * ctab[(n * k) % N];
          ai -= xs[f][n] * stab[(n * k) % N];
        end
        ref_re[f][k] = ar / scale;
        ref_im[f][k] = ai / scale;
      end
  end

  // watchdog
  initial begin
    repeat (20 * (NFR + NFL) * Q + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus
  initial begin
    for (int p = 0; p < int'(LANES); p++) x_in[p] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int f = 0; f < int'(NFR + NFL); f++)
      for (int t = 0; t < int'(Q); t++) begin
        // random stalls inside frames 1 and 3
        if ((f == 1 || f == 3) && ($urandom % 4 == 0)) begin
          en <= 1'b0;
          @(posedge clk);
        end
        en   <= 1'b1;
        t_in <= TW'(t);
        for (int p = 0; p < int'(LANES); p++) begin
          x_in[p].re <= DW'(xs[f][2 * (p * Q + t)]);
          x_in[p].im <= DW'(xs[f][2 * (p * Q + t) + 1]);
        end
        @(posedge clk);
      end
    en <= 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (first_valid_at != int'(dut.LATENCY)) begin
      failures++;
      $display("latency %0d, expected %0d", first_valid_at, dut.LATENCY);
    end
    checks++;
    if (out_count < int'(NFR * Q)) begin
      failures++;
      $display("only %0d output cycles", out_count);
    end
    $display("max bin error %f LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (en) begin
      en_cycles++;
      if (out_valid && first_valid_at < 0) first_valid_at = en_cycles - 1;
      if (first_valid_at >= 0 && !out_valid) begin
        failures++;
        $display("gap in output while enabled");
      end
    end
    if (out_valid) begin
      int f;
      f = out_count / int'(Q);
      if (int'(out_j) != out_count % int'(Q)) begin
        failures++;
        $display("out_j %0d expected %0d", out_j, out_count % int'(Q));
      end
      if (f < int'(NFR)) begin
        for (int b = 0; b < int'(LANES); b++) begin
          int k;
          real er, ei;
          k = b * int'(Q) + ((b < 2) ? int'(out_j) : ((int'(Q) - int'(out_j)) % int'(Q)));
          er = real'(x_out[b].re) - ref_re[f][k]; if (er < 0.0) er = -er;
          ei = real'(x_out[b].im) - ref_im[f][k]; if (ei < 0.0) ei = -ei;
          if (er > maxerr) maxerr = er;
          if (ei > maxerr) maxerr = ei;
          checks++;
          if (er > 6.0 || ei > 6.0) begin
            failures++;
            if (failures < 10)
              $display("frame %0d bin %0d: got (%0d,%0d) expected (%f,%f)", f, k,
                       x_out[b].re, x_out[b].im, ref_re[f][k], ref_im[f][k]);
          end
        end
      end
      out_count++;
    end
  end
endmodule
