// sync_fifo: single-clock first-in first-out buffer with show-ahead output
// (dout is the oldest word whenever empty is low). Pushing when full drops
// the word and raises overflow for one clock. Used for the packet buffers
// of the X processor.
module sync_fifo #(
  parameter int W     = 67,
  parameter int DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     push,
  input  logic [W-1:0]             din,
  input  logic                     pop,
  output logic [W-1:0]             dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     overflow
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
    if (rst) begin
      rp       <= '0;
      wp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= push && !do_push;
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(do_push) - ($clog2(DEPTH)+1)'(do_pop);
    end
  end
endmodule
