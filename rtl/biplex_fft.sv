// biplex_fft: radix-2 biplex pipelined FFT of NFFT points for two independent
// complex streams (the two polarizations of one antenna), one sample of each
// per clock, followed by a reorder buffer that delivers both spectra in
// natural channel order, one channel of both streams per clock.
// Structure (after the paper): log2(NFFT) fft_stage's in series; each shares
// one butterfly between the two streams so every butterfly is busy every
// clock. Stage i works on frames of NFFT/2^i samples. At the last stage
// output, clock c of the NFFT-clock output period (c = 0 at the internal
// output sync) holds, on the top port, bin {0, bitrev(c[M-2:0])} and, on the
// bottom port, bin {1, bitrev(c[M-2:0])} of stream c[M-1] (M = log2 NFFT).
// The reorder buffer (double-buffered, split by bin MSB so that each half
// takes one write per clock) undoes this order; it is this design's choice
// of where the paper's later transpose starts.
// shift[i] halves the results of stage i (the paper's optional downshift);
// ovf pulses when any stage saturates.
// Timing: in_sync marks sample 0 of a frame of both streams. out_sync marks
// channel 0 of the spectra of that frame and comes LATENCY clocks later,
// LATENCY = (NFFT - 1 + M) + NFFT + 1. Output runs at one channel per clock.
module biplex_fft #(
  parameter int NFFT = 2048,
  parameter int DW   = 18,
  parameter int TW_W = 18
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_sync,
  input  logic [$clog2(NFFT)-1:0] shift,
  input  logic signed [DW-1:0] a_re, a_im,     // stream 0 (X polarization)
  input  logic signed [DW-1:0] b_re, b_im,     // stream 1 (Y polarization)
  output logic signed [DW-1:0] x_re, x_im,     // stream 0 spectrum, channel out_chan
  output logic signed [DW-1:0] y_re, y_im,     // stream 1 spectrum, channel out_chan
  output logic [$clog2(NFFT)-1:0] out_chan,
  output logic                 out_sync,
  output logic                 ovf
);
  localparam int M      = $clog2(NFFT);
  localparam int PIPE   = NFFT - 1 + M;        // input frame start -> c = 0
  localparam int LATENCY = PIPE + NFFT + 1;

  logic signed [DW-1:0] sre [M+1], sim [M+1], tre [M+1], tim [M+1];
  logic                 ssync [M+1];
  logic [M-1:0]         sovf;

  assign sre[0] = a_re;
  assign sim[0] = a_im;
  assign tre[0] = b_re;
  assign tim[0] = b_im;
  assign ssync[0] = in_sync;

  for (genvar i = 0; i < M; i++) begin : g_st
    fft_stage #(.L(NFFT >> i), .DW(DW), .TW_W(TW_W)) u_st (
      .clk, .in_sync(ssync[i]), .shift(shift[i]),
      .p_re(sre[i]), .p_im(sim[i]), .q_re(tre[i]), .q_im(tim[i]),
      .top_re(sre[i+1]), .top_im(sim[i+1]), .bot_re(tre[i+1]), .bot_im(tim[i+1]),
      .out_sync(ssync[i+1]), .ovf(sovf[i]));
  end

  // Frame position at the last stage output, from an input-side counter.
  logic [M-1:0] icnt_q, icnt, c;
  assign icnt = in_sync ? '0 : icnt_q + 1'b1;
  assign c    = icnt - M'(PIPE);
  always_ff @(posedge clk) icnt_q <= icnt;

  // Frame-level sync: in_sync seen PIPE + NFFT + 1 clocks ago.
  logic [$clog2(LATENCY+1)-1:0] scnt;
  logic                         spend;
  always_ff @(posedge clk) begin
    out_sync <= 1'b0;
    if (rst) begin
      spend <= 1'b0;
      scnt  <= '0;
    end else if (in_sync) begin
      spend <= 1'b1;
      scnt  <= '0;
    end else if (spend) begin
      scnt <= scnt + 1'b1;
      if (scnt == $bits(scnt)'(LATENCY - 2)) begin
        out_sync <= 1'b1;
        spend    <= 1'b0;
      end
    end
  end

  function automatic logic [M-2:0] bitrev(input logic [M-2:0] v);
    for (int i = 0; i < M - 1; i++) bitrev[i] = v[M-2-i];
  endfunction

  // Reorder buffer, addressed {bank, stream, bin MSB, bin LSBs}
  logic [2*DW-1:0] rb [4 * NFFT];
  logic            wbank;
  logic [M-2:0]    widx;
  assign widx = bitrev(c[M-2:0]);

  always_ff @(posedge clk) begin
    rb[{wbank, c[M-1], 1'b0, widx}] <= {sre[M], sim[M]};
    rb[{wbank, c[M-1], 1'b1, widx}] <= {tre[M], tim[M]};
    if (c == '1) wbank <= ~wbank;
  end

  // Read: the bank completed last; channel k = c.
  logic [2*DW-1:0] xr, yr;
  assign xr = rb[{~wbank, 1'b0, c}];
  assign yr = rb[{~wbank, 1'b1, c}];
  always_ff @(posedge clk) begin
    x_re     <= $signed(xr[2*DW-1:DW]);
    x_im     <= $signed(xr[DW-1:0]);
    y_re     <= $signed(yr[2*DW-1:DW]);
    y_im     <= $signed(yr[DW-1:0]);
    out_chan <= c;
    ovf      <= |sovf;
  end
endmodule
