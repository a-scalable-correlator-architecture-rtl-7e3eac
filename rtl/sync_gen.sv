// sync_gen: F-engine synchronization to the 1PPS.
// The 1PPS has a fast edge and reaches all F processors synchronously; it is
// sampled by the system clock. A slower "arm" signal, asynchronous to the
// clock and sent at the half-second phase, is passed through a two-flop
// synchronizer; its rising edge arms the block, and the next rising edge of
// the 1PPS then produces a single-clock sync pulse: the reset event that
// restarts spectral windows and packet counters. The block disarms after
// the pulse. The pulse count (sync_count) is for monitoring.
// Follows the paper's description; the synchronizer depth and the monitoring
// counter are this design's choices.
// Timing: sync comes one clock after the clock edge that samples the 1PPS
// rising edge while armed.
module sync_gen (
  input  logic        clk,
  input  logic        rst,
  input  logic        pps,
  input  logic        arm,
  output logic        sync,
  output logic        armed,
  output logic [15:0] sync_count
);
  logic [2:0] arm_s;   // two synchronizer flops + edge history
  logic       pps_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      arm_s      <= '0;
      pps_q      <= 1'b0;
      armed      <= 1'b0;
      sync       <= 1'b0;
      sync_count <= '0;
    end else begin
      arm_s <= {arm_s[1:0], arm};
      pps_q <= pps;
      sync  <= 1'b0;
      if (armed && pps && !pps_q) begin
        sync       <= 1'b1;
        armed      <= 1'b0;
        sync_count <= sync_count + 1'b1;
      end else if (arm_s[1] && !arm_s[2]) begin
        armed <= 1'b1;
      end
    end
  end
endmodule
