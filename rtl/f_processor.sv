// f_processor: the F processor of one IBOB board, for ANT antennas with two
// polarizations each. Per input: digital down-conversion (shared LO, mixer,
// 16-tap low-pass keeping half the band, one complex sample per clock), a
// TAPS-tap NCHAN-channel polyphase filter bank (polyphase FIR + biplex FFT of
// the antenna's two polarizations), per-channel equalization and 4-bit
// requantization. The spectra then go through the corner turn (T_ACC spectra
// transposed so that a packet holds T_ACC time samples of one channel) and
// the packetizer, which tags each packet with antenna index and MCNT and sends
// it over the XAUI link. The 1PPS/arm sync restarts LO phase, filter bank
// frames, corner-turn banks and MCNT together on every F processor.
// The structure follows the paper's IBOB design; the Pocket Correlator
// output path of that design is the separate pocket_xacc block.
// Timing: ADC input is PAR samples per input per clock; a sync reaches the
// corner turn after the DDC, PFB and FFT latencies; packets of the first time
// block leave T_ACC spectra later.
module f_processor #(
  parameter int ANT   = 2,
  parameter int PAR   = 4,
  parameter int NCHAN = 2048,
  parameter int TAPS  = 8,
  parameter int T_ACC = 128,
  parameter int DW    = 18
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic signed [7:0]          adc [ANT][2][PAR],
  input  logic                       pps,
  input  logic                       arm,
  input  logic [31:0]                lo_inc,
  input  logic [$clog2(NCHAN)-1:0]   fft_shift,
  input  logic [15:0]                ant_base,
  input  logic                       eq_we,
  input  logic [7:0]                 eq_ant,
  input  logic                       eq_pol,
  input  logic [$clog2(NCHAN)-1:0]   eq_addr,
  input  logic [17:0]                eq_data,
  output corr_pkg::pkt_t             xaui_out,
  output corr_pkg::dual_pol4_t       spec_out [ANT],    // requantized spectra (Pocket Correlator path)
  output logic                       spec_sync,
  output logic                       fft_ovf,
  output logic                       armed,
  output logic [15:0]                sync_count,
  output logic [15:0]                overruns
);
  logic sync;
  sync_gen u_sync (.clk, .rst, .pps, .arm, .sync, .armed, .sync_count);

  logic signed [7:0] lo_cos [PAR], lo_sin [PAR];
  dds_lo #(.PAR(PAR)) u_lo (.clk, .rst, .sync, .freq_inc(lo_inc), .cos_o(lo_cos), .sin_o(lo_sin));

  // align ADC samples with the registered LO
  logic signed [7:0] adc_r [ANT][2][PAR];
  logic              sync_r;
  always_ff @(posedge clk) begin
    adc_r  <= adc;
    sync_r <= sync;
  end

  logic signed [DW-1:0] d_re [ANT][2], d_im [ANT][2];
  logic                 d_sync [ANT][2];
  logic signed [DW-1:0] p_re [ANT][2], p_im [ANT][2];
  logic                 p_sync [ANT];
  logic signed [DW-1:0] x_re [ANT], x_im [ANT], y_re [ANT], y_im [ANT];
  logic                 f_sync [ANT], f_ovf [ANT];
  logic                 q_sync [ANT];

  for (genvar a = 0; a < ANT; a++) begin : g_ant
    for (genvar p = 0; p < 2; p++) begin : g_pol
      ddc #(.PAR(PAR), .OUT_W(DW)) u_ddc (
        .clk, .in_sync(sync_r), .adc(adc_r[a][p]), .lo_cos, .lo_sin,
        .out_re(d_re[a][p]), .out_im(d_im[a][p]), .out_sync(d_sync[a][p]));
    end
    pfb_fir #(.NCHAN(NCHAN), .TAPS(TAPS), .DW(DW)) u_pfb (
      .clk, .in_sync(d_sync[a][0]), .in_re(d_re[a]), .in_im(d_im[a]),
      .out_re(p_re[a]), .out_im(p_im[a]), .out_sync(p_sync[a]));
    biplex_fft #(.NFFT(NCHAN), .DW(DW)) u_fft (
      .clk, .rst, .in_sync(p_sync[a]), .shift(fft_shift),
      .a_re(p_re[a][0]), .a_im(p_im[a][0]), .b_re(p_re[a][1]), .b_im(p_im[a][1]),
      .x_re(x_re[a]), .x_im(x_im[a]), .y_re(y_re[a]), .y_im(y_im[a]),
      .out_chan(), .out_sync(f_sync[a]), .ovf(f_ovf[a]));
    eq_requant #(.NCHAN(NCHAN), .DW(DW)) u_eq (
      .clk, .in_sync(f_sync[a]), .x_re(x_re[a]), .x_im(x_im[a]), .y_re(y_re[a]), .y_im(y_im[a]),
      .coef_we(eq_we && eq_ant == 8'(a)), .coef_pol(eq_pol), .coef_addr(eq_addr), .coef_data(eq_data),
      .out(spec_out[a]), .out_sync(q_sync[a]));
  end

  always_comb begin
    fft_ovf = 1'b0;
    for (int a = 0; a < ANT; a++) fft_ovf |= f_ovf[a];
  end
  assign spec_sync = q_sync[0];

  logic                        bank_ready, ready_bank, rd_bank;
  logic [corr_pkg::MCNT_W-1:0] ready_block;
  logic [$clog2(NCHAN)-1:0]    rd_chan;
  logic [$clog2(T_ACC/4)-1:0]  rd_word;
  logic [4*16*ANT-1:0]         rd_data;

  corner_turn #(.NCHAN(NCHAN), .T_ACC(T_ACC), .ANT(ANT)) u_ct (
    .clk, .rst, .in_sync(q_sync[0]), .in_data(spec_out),
    .bank_ready, .ready_bank, .ready_block, .rd_bank, .rd_chan, .rd_word, .rd_data);

  f_packetizer #(.NCHAN(NCHAN), .T_ACC(T_ACC), .ANT(ANT)) u_pk (
    .clk, .rst, .ant_base, .bank_ready, .ready_bank, .ready_block,
    .rd_bank, .rd_chan, .rd_word, .rd_data, .out(xaui_out), .overruns);
endmodule
