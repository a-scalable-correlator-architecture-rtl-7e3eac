// packet_correlator: a packetized FX correlator for N_ANT dual-polarization
// antennas (the 16-antenna, 2048-channel, 4-bit, full-Stokes deployment by
// default). It holds N_ANT/ANT_PER_F nodes; each node is an F processor for
// ANT_PER_F antennas whose packets go over a point-to-point XAUI link (a
// direct connection here) to an X processor with XENG_PER_NODE X engines.
// Every X processor has one bidirectional 10GbE port: it transmits its F
// processor's packets and its accumulated visibilities, and receives the
// packets addressed to its X engines. The Ethernet switch, which connects
// these ports to each other and to a data-acquisition port (number N_NODE),
// is outside the design: eth_tx/eth_tx_dest and eth_rx are its ports. MCNT
// decides the destination: X engine MCNT mod N_XENG_TOT, i.e. every engine
// takes every N_XENG_TOT-th channel.
// Control inputs (LO frequency, FFT downshift schedule, equalizer
// coefficients, accumulation length) are broadcast to all nodes; the
// equalizer write port selects a global antenna number.
module packet_correlator #(
  parameter int N_ANT         = 16,
  parameter int ANT_PER_F     = 2,
  parameter int XENG_PER_NODE = 2,
  parameter int PAR           = 4,
  parameter int NCHAN         = 2048,
  parameter int TAPS          = 8,
  parameter int T_ACC         = 128,
  parameter int N_WIN         = 8,
  parameter int TIMEOUT       = 16 * 16 * 128,
  parameter int N_NODE        = N_ANT / ANT_PER_F
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [7:0]         adc [N_ANT][2][PAR],
  input  logic                      pps,
  input  logic                      arm,
  input  logic [31:0]               lo_inc,
  input  logic [$clog2(NCHAN)-1:0]  fft_shift,
  input  logic                      eq_we,
  input  logic [7:0]                eq_ant,
  input  logic                      eq_pol,
  input  logic [$clog2(NCHAN)-1:0]  eq_addr,
  input  logic [17:0]               eq_data,
  input  logic [15:0]               acc_len,
  output corr_pkg::pkt_t            eth_tx [N_NODE],
  output logic [7:0]                eth_tx_dest [N_NODE],
  input  corr_pkg::pkt_t            eth_rx [N_NODE],
  output logic                      fft_ovf [N_NODE],
  output logic [15:0]               sync_count [N_NODE],
  output logic [31:0]               stat_accepted [N_NODE][XENG_PER_NODE],
  output logic [31:0]               stat_rejected [N_NODE][XENG_PER_NODE],
  output logic [15:0]               stat_timeouts [N_NODE][XENG_PER_NODE],
  output logic [31:0]               stat_valid_windows [N_NODE][XENG_PER_NODE],
  output logic [15:0]               stat_integrations [N_NODE][XENG_PER_NODE],
  output logic [31:0]               stat_loop_released [N_NODE],
  output logic [15:0]               stat_switch_drops [N_NODE],
  output logic [15:0]               stat_overruns [N_NODE]
);
  localparam int N_XENG_TOT = N_NODE * XENG_PER_NODE;

  for (genvar n = 0; n < N_NODE; n++) begin : g_node
    corr_pkg::pkt_t       xaui;
    corr_pkg::dual_pol4_t spec [ANT_PER_F];
    logic                 spec_sync, armed;
    logic [15:0]          f_over, x_over;
    logic signed [7:0]    nadc [ANT_PER_F][2][PAR];

    always_comb
      for (int a = 0; a < ANT_PER_F; a++) nadc[a] = adc[n * ANT_PER_F + a];

    f_processor #(.ANT(ANT_PER_F), .PAR(PAR), .NCHAN(NCHAN), .TAPS(TAPS), .T_ACC(T_ACC)) u_f (
      .clk, .rst, .adc(nadc), .pps, .arm, .lo_inc, .fft_shift, .ant_base(16'(n * ANT_PER_F)),
      .eq_we(eq_we && (int'(eq_ant) / ANT_PER_F == n)), .eq_ant(8'(int'(eq_ant) % ANT_PER_F)),
      .eq_pol, .eq_addr, .eq_data, .xaui_out(xaui), .spec_out(spec), .spec_sync,
      .fft_ovf(fft_ovf[n]), .armed, .sync_count(sync_count[n]), .overruns(f_over));

    x_processor #(.N_ANT(N_ANT), .NCHAN(NCHAN), .T_ACC(T_ACC), .N_WIN(N_WIN),
                  .N_XENG_TOT(N_XENG_TOT), .XENG_PER_NODE(XENG_PER_NODE), .DA_PORT(N_NODE),
                  .TIMEOUT(TIMEOUT)) u_x (
      .clk, .rst, .node_id(8'(n)), .acc_len, .xaui_in(xaui), .eth_rx(eth_rx[n]),
      .eth_tx(eth_tx[n]), .eth_tx_dest(eth_tx_dest[n]),
      .stat_accepted(stat_accepted[n]), .stat_rejected(stat_rejected[n]),
      .stat_timeouts(stat_timeouts[n]), .stat_valid_windows(stat_valid_windows[n]),
      .stat_integrations(stat_integrations[n]), .stat_loop_released(stat_loop_released[n]),
      .stat_switch_drops(stat_switch_drops[n]), .stat_overruns(x_over));

    assign stat_overruns[n] = f_over + x_over;
  end
endmodule
