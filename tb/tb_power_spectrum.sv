// Self-checking testbench of the power spectrum unit: random and extreme
// complex inputs, result compared with (re^2+im^2)/2 computed here with
// 64-bit integers, one-cycle latency and index pass-through checked.
module tb_power_spectrum;
  import fft_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [11:0] in_j = '0, out_j;
  cplx_t x [LANES];
  logic [PW-1:0] p [LANES];

  power_spectrum dut (.*);
  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  longint exp_p [LANES];
  int exp_j;
  bit pending = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < int'(LANES); b++) x[b] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      if (pending) begin
        checks++;
        if (!out_valid || int'(out_j) != exp_j) begin
          failures++;
          $display("valid/index wrong at %0d", i);
        end
        for (int b = 0; b < int'(LANES); b++) begin
          checks++;
          if (longint'(p[b]) != exp_p[b]) begin
            failures++;
            if (failures < 10) $display("lane %0d got %0d expected %0d", b, p[b], exp_p[b]);
          end
        end
      end
      in_valid = 1'b1;
      in_j = 12'($urandom);
      exp_j = int'(in_j);
      for (int b = 0; b < int'(LANES); b++) begin
        longint r, m, v;
        int ri, mi;
        ri = int'($urandom % 32'd262144) - 131072;
        mi = int'($urandom % 32'd262144) - 131072;
        r = longint'(ri);
        m = longint'(mi);
        if (i == 5) begin r = -131072; m = -131072; end
        if (i == 6) begin r = 131071; m = -131072; end
        x[b].re = DW'(r);
        x[b].im = DW'(m);
        v = (r * r + m * m) / 2;
        if (v > 64'h3_FFFF_FFFF) v = 64'h3_FFFF_FFFF;
        exp_p[b] = v;
      end
      pending = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
