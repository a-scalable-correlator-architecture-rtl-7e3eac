// eq_requant: per-channel equalization and 4-bit requantization for the two
// polarizations of one antenna. Each channel's complex value is multiplied by
// an 18-bit gain from a coefficient memory that a control processor can
// rewrite at any time (automatic gain control), then rounded and saturated to
// a 4-bit, 15-level value (-7..+7) so the positive and negative ranges match.
// Following the paper: a scalar multiply on the PFB output with 18-bit
// coefficients from an updatable memory, then 18-bit -> 4-bit requantization.
// This design's choices: one coefficient per channel per polarization,
// unsigned coefficients with COEF_FRAC fractional bits (initialised to 1.0),
// and a gain of 1.0 keeping the top 4 bits of the 18-bit input.
// Timing: input one channel per clock with in_sync on channel 0; output
// registered one clock later with out_sync. Coefficient writes take effect
// on the next clock.
module eq_requant #(
  parameter int NCHAN     = 2048,
  parameter int DW        = 18,
  parameter int CW        = 18,
  parameter int COEF_FRAC = 12,
  parameter int OUT_W     = 4
) (
  input  logic                     clk,
  input  logic                     in_sync,
  input  logic signed [DW-1:0]     x_re, x_im, y_re, y_im,
  input  logic                     coef_we,
  input  logic                     coef_pol,          // 0 = X, 1 = Y
  input  logic [$clog2(NCHAN)-1:0] coef_addr,
  input  logic [CW-1:0]            coef_data,
  output corr_pkg::dual_pol4_t     out,
  output logic                     out_sync
);
  localparam int AW    = $clog2(NCHAN);
  localparam int SHIFT = COEF_FRAC + DW - OUT_W;
  localparam longint QMAX = (longint'(1) <<< (OUT_W - 1)) - 1;

  logic [CW-1:0] coef [2 * NCHAN];   // addressed {polarization, channel}
  logic [AW-1:0] ch_q, ch;

  initial
    for (int i = 0; i < 2 * NCHAN; i++) coef[i] = CW'(1 << COEF_FRAC);

  assign ch = in_sync ? '0 : ch_q + 1'b1;

  function automatic logic signed [OUT_W-1:0] rq(input logic signed [DW-1:0] v, input logic [CW-1:0] g);
    longint p;
    p = (longint'(v) * longint'({1'b0, g}) + (longint'(1) <<< (SHIFT - 1))) >>> SHIFT;
    if (p > QMAX)  p = QMAX;
    if (p < -QMAX) p = -QMAX;
    return OUT_W'(p);
  endfunction

  always_ff @(posedge clk) begin
    ch_q <= ch;
    if (coef_we) coef[{coef_pol, coef_addr}] <= coef_data;
    out.xre  <= rq(x_re, coef[{1'b0, ch}]);
    out.xim  <= rq(x_im, coef[{1'b0, ch}]);
    out.yre  <= rq(y_re, coef[{1'b1, ch}]);
    out.yim  <= rq(y_im, coef[{1'b1, ch}]);
    out_sync <= in_sync;
  end
endmodule
