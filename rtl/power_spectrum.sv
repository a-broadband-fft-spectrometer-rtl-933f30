// Power spectrum: squared magnitude of four complex 18-bit bins per cycle.
// p = (re^2 + im^2) / 2, saturated to 34 bits; the halving keeps the result
// in the 34 bits the paper gives for the power values (only the case
// re = im = -2**17 saturates). The bin index travels along unchanged.
// Latency: one clock cycle; a result every cycle.
module power_spectrum
  import fft_pkg::*;
#(
  parameter int unsigned JW = 2 * LOG4_NC_DEFAULT - 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [JW-1:0] in_j,
  input  cplx_t         x     [LANES],
  output logic          out_valid,
  output logic [JW-1:0] out_j,
  output logic [PW-1:0] p     [LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_j <= in_j;
      for (int b = 0; b < int'(LANES); b++) begin
        logic signed [2*DW-1:0] r, i;
        logic [2*DW-1:0]        sq;
        r  = (2*DW)'(x[b].re);
        i  = (2*DW)'(x[b].im);
        sq = r * r + i * i;
        p[b] <= sq[2*DW-1] ? {PW{1'b1}} : sq[PW:1];
      end
    end
  end
endmodule
