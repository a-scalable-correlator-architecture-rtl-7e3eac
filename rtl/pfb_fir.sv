// pfb_fir: polyphase FIR front end of the polyphase filter bank, for the two
// polarizations of one antenna. For channel position n of the current
// NCHAN-sample frame it forms
//   y[n] = sum_{k=0}^{TAPS-1} h[(TAPS-1-k)*NCHAN + n] * x[n - k*NCHAN],
// so the following NCHAN-point FFT sees TAPS frames of samples weighted by
// one long window. As in the paper, the window is a sinc whose period is one
// channel (NCHAN samples) times a Hamming taper over all TAPS*NCHAN samples.
// The delay lines are TAPS-1 buffers of NCHAN complex samples per
// polarization, read and rewritten at the same address every clock.
// The paper's text gives 8 taps (its Fig. 14 box reads "4 tap"); 8 is used.
// Coefficient width (18 bits, the multiplier width of the FPGA), the scaling
// (peak coefficient = 1.0) and truncation of the sum are this design's choices.
// Timing: one complex sample per polarization per clock; outputs registered
// 2 clocks after the input; out_sync is in_sync delayed by 2. in_sync marks
// position 0 of a frame and restarts the position counter, which then runs
// freely modulo NCHAN.
module pfb_fir #(
  parameter int NCHAN = 2048,
  parameter int TAPS  = 8,
  parameter int DW    = 18,
  parameter int CW    = 18
) (
  input  logic                 clk,
  input  logic                 in_sync,
  input  logic signed [DW-1:0] in_re [2],
  input  logic signed [DW-1:0] in_im [2],
  output logic signed [DW-1:0] out_re [2],
  output logic signed [DW-1:0] out_im [2],
  output logic                 out_sync
);
  localparam int AW = $clog2(NCHAN);
  logic [AW-1:0] pos_q;
  logic [AW-1:0] pos;

  // window coefficient i of the TAPS*NCHAN-point prototype filter
  function automatic logic signed [CW-1:0] coef_at(input int i);
    real w;
    w = corr_pkg::sinc((real'(i) - real'(TAPS * NCHAN) / 2.0) / real'(NCHAN)) *
        (0.54 - 0.46 * $cos(2.0 * 3.14159265358979323846 * real'(i) / real'(TAPS * NCHAN - 1)));
    return CW'(corr_pkg::round_r(w * real'((1 << (CW - 1)) - 1)));
  endfunction

  assign pos = in_sync ? '0 : pos_q + 1'b1;

  // tap k = input delayed by k frames; one frame-delay memory per tap
  logic [2*DW-1:0]      tap [2][TAPS];
  logic [2*DW-1:0]      tap_r [2][TAPS];
  logic signed [CW-1:0] c_r [TAPS];
  logic                 sync_r;

  for (genvar p = 0; p < 2; p++) begin : g_pol
    assign tap[p][0] = {in_re[p], in_im[p]};
    for (genvar k = 1; k < TAPS; k++) begin : g_dl
      logic [2*DW-1:0] dl [NCHAN];   // {re, im}
      initial
        for (int n = 0; n < NCHAN; n++) dl[n] = '0;
      assign tap[p][k] = dl[pos];
      always_ff @(posedge clk) dl[pos] <= tap[p][k-1];
    end
  end

  // coefficient ROM of tap k holds segment TAPS-1-k of the window
  for (genvar k = 0; k < TAPS; k++) begin : g_coef
    logic signed [CW-1:0] rom [NCHAN];
    initial
      for (int n = 0; n < NCHAN; n++) rom[n] = coef_at((TAPS - 1 - k) * NCHAN + n);
    always_ff @(posedge clk) c_r[k] <= rom[pos];
  end

  always_ff @(posedge clk) begin
    pos_q  <= pos;
    tap_r  <= tap;
    sync_r <= in_sync;
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      longint sre, sim;
      sre = 0;
      sim = 0;
      for (int k = 0; k < TAPS; k++) begin
        sre += longint'($signed(tap_r[p][k][2*DW-1:DW])) * longint'(c_r[k]);
        sim += longint'($signed(tap_r[p][k][DW-1:0])) * longint'(c_r[k]);
      end
      out_re[p] <= DW'(corr_pkg::sat_s(sre >>> (CW - 1), DW));
      out_im[p] <= DW'(corr_pkg::sat_s(sim >>> (CW - 1), DW));
    end
    out_sync <= sync_r;
  end
endmodule
