// fft_stage: one stage of the radix-2 biplex pipelined FFT (decimation in
// frequency) with a delay-commutator in front of a single butterfly.
// The stage sees two streams, p and q, each made of frames of L samples that
// start together (in_sync marks the first sample). q is delayed by L/2; a
// switch passes (p, q delayed) in the first half of a frame and crosses them
// in the second half; the upper path is then delayed by L/2. The butterfly so
// receives the pair (p[n], p[n+L/2]) of frame k during the second half of
// frame k and the pair (q[n], q[n+L/2]) during the first half of frame k+1:
// it works every clock, on the two streams in turn.
// It outputs top = a + b and bot = (a - b) * exp(-2*pi*i*n/L). Each output
// is a stream of frames of L/2 samples: first p's half-size problem, then
// q's, which is exactly what the next stage (L/2) expects.
// When shift is set the results are halved (the paper's optional downshift
// per stage); otherwise they are saturated to DW bits and ovf is raised.
// Twiddle factors are TW_W-bit with 1.0 = 2^(TW_W-2); arithmetic truncates.
// Timing: out_sync (first output sample of p's half problem) comes L/2 + 1
// clocks after in_sync; out_sync then repeats every L clocks.
module fft_stage #(
  parameter int L    = 2048,
  parameter int DW   = 18,
  parameter int TW_W = 18
) (
  input  logic                 clk,
  input  logic                 in_sync,
  input  logic                 shift,
  input  logic signed [DW-1:0] p_re, p_im, q_re, q_im,
  output logic signed [DW-1:0] top_re, top_im, bot_re, bot_im,
  output logic                 out_sync,
  output logic                 ovf
);
  localparam int D  = L / 2;
  localparam int LW = $clog2(L);
  localparam int NW = (D > 1) ? $clog2(D) : 1;
  localparam int TS = TW_W - 2;

  logic signed [TW_W-1:0] tw_re [D];
  logic signed [TW_W-1:0] tw_im [D];
  initial begin
    for (int n = 0; n < D; n++) begin
      tw_re[n] = TW_W'(corr_pkg::round_r(real'(1 << TS) * $cos(2.0 * 3.14159265358979323846 * real'(n) / real'(L))));
      tw_im[n] = TW_W'(corr_pkg::round_r(-real'(1 << TS) * $sin(2.0 * 3.14159265358979323846 * real'(n) / real'(L))));
    end
  end

  logic [LW-1:0] cnt_q;
  logic [LW-1:0] ph;
  assign ph = in_sync ? '0 : cnt_q + 1'b1;
  always_ff @(posedge clk) cnt_q <= ph;

  logic half;
  assign half = ph[LW-1];

  logic [2*DW-1:0] qd, top_s, bot_s, topd;
  delay_line #(.W(2*DW), .DEPTH(D)) u_dq (.clk(clk), .din({q_re, q_im}), .dout(qd));
  assign top_s = half ? qd : {p_re, p_im};
  assign bot_s = half ? {p_re, p_im} : qd;
  delay_line #(.W(2*DW), .DEPTH(D)) u_dt (.clk(clk), .din(top_s), .dout(topd));

  logic [NW-1:0] n;
  assign n = (D > 1) ? NW'(ph) : '0;

  always_ff @(posedge clk) begin
    longint are, aim, bre, bim, sre, sim, dre, dim, mre, mim, o [4];
    logic of;
    are = longint'($signed(topd[2*DW-1:DW]));
    aim = longint'($signed(topd[DW-1:0]));
    bre = longint'($signed(bot_s[2*DW-1:DW]));
    bim = longint'($signed(bot_s[DW-1:0]));
    sre = are + bre;
    sim = aim + bim;
    dre = are - bre;
    dim = aim - bim;
    mre = (dre * longint'(tw_re[n]) - dim * longint'(tw_im[n])) >>> TS;
    mim = (dre * longint'(tw_im[n]) + dim * longint'(tw_re[n])) >>> TS;
    o[0] = shift ? (sre >>> 1) : sre;
    o[1] = shift ? (sim >>> 1) : sim;
    o[2] = shift ? (mre >>> 1) : mre;
    o[3] = shift ? (mim >>> 1) : mim;
    of = 1'b0;
    for (int i = 0; i < 4; i++) begin
      if (corr_pkg::sat_s(o[i], DW) != o[i]) of = 1'b1;
      o[i] = corr_pkg::sat_s(o[i], DW);
    end
    top_re   <= DW'(o[0]);
    top_im   <= DW'(o[1]);
    bot_re   <= DW'(o[2]);
    bot_im   <= DW'(o[3]);
    ovf      <= of;
    out_sync <= (ph == LW'(D));
  end
endmodule
