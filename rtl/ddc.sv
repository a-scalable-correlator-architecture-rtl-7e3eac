// ddc: digital down-converter for one ADC input.
// Each clock brings PAR real samples (the ADC runs at PAR times the FPGA
// clock). Every sample is multiplied by the local oscillator (cos, -sin) to
// shift the selected band to zero frequency, and a 16-tap low-pass FIR keeps
// half of the digitized band; the output is decimated by PAR, so one complex
// baseband sample leaves per clock. The paper gives the mixer, the LO table,
// the 16-tap low-pass and "half of the digitized band"; the filter design
// (Hamming-windowed sinc with cutoff at 1/(2*PAR) of the sample rate, unity DC
// gain), coefficient width and output scaling are this design's choices.
// Timing: out_re/out_im are registered 2 clocks after the samples they use;
// out_sync is in_sync delayed by the same 2 clocks.
module ddc #(
  parameter int PAR    = 4,
  parameter int IN_W   = 8,
  parameter int LO_W   = 8,
  parameter int NTAP   = 16,
  parameter int COEF_W = 16,
  parameter int OUT_W  = 18,
  parameter int SHIFT  = 13
) (
  input  logic                    clk,
  input  logic                    in_sync,
  input  logic signed [IN_W-1:0]  adc [PAR],    // adc[0] is the oldest sample
  input  logic signed [LO_W-1:0]  lo_cos [PAR],
  input  logic signed [LO_W-1:0]  lo_sin [PAR],
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im,
  output logic                    out_sync
);
  localparam int MW = IN_W + LO_W;
  // history, index 0 = newest mixed sample
  logic signed [MW-1:0] hre [NTAP];
  logic signed [MW-1:0] him [NTAP];
  logic sync_d;

  // windowed-sinc low-pass, cutoff at 1/(2*PAR) of the input rate, unity DC gain
  function automatic real proto(input int k);
    real x;
    x = (real'(k) - real'(NTAP - 1) / 2.0) / real'(PAR);
    return corr_pkg::sinc(x) *
           (0.54 - 0.46 * $cos(2.0 * 3.14159265358979323846 * real'(k) / real'(NTAP - 1)));
  endfunction

  function automatic logic signed [COEF_W-1:0] coef_at(input int k);
    real sum;
    sum = 0.0;
    for (int i = 0; i < NTAP; i++) sum += proto(i);
    return COEF_W'(corr_pkg::round_r(proto(k) / sum * real'(1 << (COEF_W - 1))));
  endfunction

  typedef logic signed [COEF_W-1:0] coef_arr_t [NTAP];
  function automatic coef_arr_t mk_coefs();
    for (int k = 0; k < NTAP; k++) mk_coefs[k] = coef_at(k);
  endfunction
  localparam coef_arr_t h = mk_coefs();

  always_ff @(posedge clk) begin
    for (int k = NTAP - 1; k >= PAR; k--) begin
      hre[k] <= hre[k - PAR];
      him[k] <= him[k - PAR];
    end
    for (int i = 0; i < PAR; i++) begin
      hre[PAR - 1 - i] <= MW'(adc[i] * lo_cos[i]);
      him[PAR - 1 - i] <= MW'(-(adc[i] * lo_sin[i]));
    end
    sync_d <= in_sync;
  end

  always_ff @(posedge clk) begin
    longint are, aim;
    are = 0;
    aim = 0;
    for (int k = 0; k < NTAP; k++) begin
      are += longint'(hre[k]) * longint'(h[k]);
      aim += longint'(him[k]) * longint'(h[k]);
    end
    out_re   <= OUT_W'(corr_pkg::sat_s(are >>> SHIFT, OUT_W));
    out_im   <= OUT_W'(corr_pkg::sat_s(aim >>> SHIFT, OUT_W));
    out_sync <= sync_d;
  end
endmodule
