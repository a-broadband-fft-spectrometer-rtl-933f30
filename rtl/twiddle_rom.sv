// Twiddle factor table W_CIRCLE^k = exp(-2*pi*i*k/CIRCLE), k = 0..DEPTH-1,
// with NPORT synchronous read ports (one clock-enabled register each).
// Entries are Q1.16 in 18 bits, so W^0 is exactly 65536. The table is
// computed when the memory is initialised, standing for the twiddle RAM the
// paper keeps in the FPGA; the number format is this design's choice.
module twiddle_rom
  import fft_pkg::*;
#(
  parameter int unsigned CIRCLE = 16,
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned NPORT  = 3,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic [AW-1:0] addr [NPORT],
  output twid_t         tw   [NPORT]
);
  localparam real PI = 3.14159265358979323846;
  twid_t rom [DEPTH];

  initial begin
    for (int k = 0; k < int'(DEPTH); k++) begin
      rom[k].re = TW_W'($rtoi($floor(65536.0 * $cos(2.0 * PI * k / CIRCLE) + 0.5)));
      rom[k].im = TW_W'($rtoi($floor(-65536.0 * $sin(2.0 * PI * k / CIRCLE) + 0.5)));
    end
  end

  for (genvar p = 0; p < int'(NPORT); p++) begin : g_port
    always_ff @(posedge clk) if (en) tw[p] <= rom[addr[p]];
  end
endmodule
