// Clock-enabled delay line: the output is the input of DEPTH enabled cycles
// earlier. Built as a circular buffer in RAM (read before write at the same
// address), as the long delays of the radix-4 commutators would be in FPGA
// block RAM. DEPTH must be at least 1 (a zero delay is a wire at the caller). The contents are not reset: the
// pipeline discards the outputs of its first frames.
module delay_line #(
  parameter int unsigned W     = 36,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  if (DEPTH == 1) begin : g_reg
    logic unused_rst;
    assign unused_rst = rst_n;
    always_ff @(posedge clk) if (en) dout <= din;
  end else begin : g_ram
    localparam int unsigned AW = $clog2(DEPTH);
    logic [W-1:0]  mem [DEPTH];
    logic [AW-1:0] ptr;
    assign dout = mem[ptr];
    always_ff @(posedge clk) if (en) mem[ptr] <= din;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                             ptr <= '0;
      else if (en && ptr == AW'(DEPTH - 1))   ptr <= '0;
      else if (en)                            ptr <= ptr + 1'b1;
    end
  end
endmodule
