// delay_line: fixed delay of DEPTH clocks for a W-bit word, built as a
// circular buffer in RAM (one write and one read per clock at the same
// address). Used for the Z^-D blocks of the FFT commutators and the X engine.
// Timing: dout equals din of DEPTH clocks earlier (DEPTH >= 1).
module delay_line #(
  parameter int W     = 16,
  parameter int DEPTH = 128
) (
  input  logic         clk,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] ptr;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  assign dout = mem[ptr];

  always_ff @(posedge clk) begin
    mem[ptr] <= din;
    ptr      <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  end
endmodule
