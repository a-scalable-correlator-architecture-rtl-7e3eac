// dds_lo: digital local oscillator of the down-converter.
// A wide phase accumulator advances by PAR*freq_inc every clock (PAR samples
// per clock from the ADC); the phase of each of the PAR samples is rounded to
// the nearest address of a 2^LUT_AW-entry sine table. Following the paper, the
// table is addressed with as many bits as an ADC sample has (8), which is
// enough for any mixing frequency. Cosine reads the same table a quarter
// period ahead. Amplitude width LUT_DW and the phase width are this design's
// choices. A sync pulse restarts the phase at zero so that all F engines mix
// with the same LO phase after the 1PPS reset event.
// Timing: cos_o/sin_o are registered, one clock after the phase they belong to.
module dds_lo #(
  parameter int PHASE_W = 32,
  parameter int LUT_AW  = 8,
  parameter int LUT_DW  = 8,
  parameter int PAR     = 4
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     sync,
  input  logic [PHASE_W-1:0]       freq_inc,   // phase step per sample, 2^PHASE_W = one turn
  output logic signed [LUT_DW-1:0] cos_o [PAR],
  output logic signed [LUT_DW-1:0] sin_o [PAR]
);
  localparam int N = 1 << LUT_AW;
  logic signed [LUT_DW-1:0] lut [N];
  logic [PHASE_W-1:0] phase;

  initial begin
    for (int i = 0; i < N; i++)
      lut[i] = LUT_DW'(corr_pkg::round_r(real'((1 << (LUT_DW - 1)) - 1) *
                                          $sin(2.0 * 3.14159265358979323846 * real'(i) / real'(N))));
  end

  logic [PHASE_W-1:0] phase_now;
  assign phase_now = (rst || sync) ? '0 : phase;

  always_ff @(posedge clk) phase <= phase_now + PHASE_W'(PAR) * freq_inc;

  always_ff @(posedge clk) begin
    for (int i = 0; i < PAR; i++) begin
      logic [PHASE_W-1:0] ph;
      logic [LUT_AW-1:0]  a;
      ph = phase_now + PHASE_W'(i) * freq_inc + (PHASE_W'(1) << (PHASE_W - LUT_AW - 1));
      a  = ph[PHASE_W-1 -: LUT_AW];
      sin_o[i] <= lut[a];
      cos_o[i] <= lut[LUT_AW'(a + LUT_AW'(N / 4))];
    end
  end
endmodule
