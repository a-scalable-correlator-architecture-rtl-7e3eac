// x_processor: one BEE2 FPGA acting as X processor for XENG_PER_NODE X
// engines that share one 10GbE link. Transmit: F-engine packets from the
// XAUI link and accumulated-output packets go out through tx_mux, which keeps
// self-addressed packets on chip (loopback). Receive: loopback_merge merges
// switch traffic with loopback packets, pkt_switch hands each packet to the
// X engine owning its MCNT, and per engine rx_buffer (filter and unscramble),
// xeng_core, win_valid and vacc (long-term accumulator) follow. Each engine's
// processing rate is set by the packets reaching its own receive buffer.
// Structure after the paper's X processor figure; names of the local
// signals follow the blocks. CH_LOCAL = NCHAN / N_XENG_TOT channels per engine.
module x_processor #(
  parameter int N_ANT         = 16,
  parameter int NCHAN         = 2048,
  parameter int T_ACC         = 128,
  parameter int N_WIN         = 8,
  parameter int N_XENG_TOT    = 16,
  parameter int XENG_PER_NODE = 2,
  parameter int DA_PORT       = 8,
  parameter int TIMEOUT       = 16 * 16 * 128
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [7:0]     node_id,
  input  logic [15:0]    acc_len,
  input  corr_pkg::pkt_t xaui_in,
  input  corr_pkg::pkt_t eth_rx,
  output corr_pkg::pkt_t eth_tx,
  output logic [7:0]     eth_tx_dest,
  output logic [31:0]    stat_accepted [XENG_PER_NODE],
  output logic [31:0]    stat_rejected [XENG_PER_NODE],
  output logic [15:0]    stat_timeouts [XENG_PER_NODE],
  output logic [31:0]    stat_valid_windows [XENG_PER_NODE],
  output logic [15:0]    stat_integrations [XENG_PER_NODE],
  output logic [31:0]    stat_loop_released,
  output logic [15:0]    stat_switch_drops,
  output logic [15:0]    stat_overruns
);
  import corr_pkg::*;
  localparam int CH_LOCAL = NCHAN / N_XENG_TOT;
  localparam int ACC_W    = 2 * 4 + 2 + $clog2(T_ACC);

  pkt_t acc_pkt [XENG_PER_NODE];
  logic acc_ready [XENG_PER_NODE];
  pkt_t loop_pkt, merged;
  pkt_t eng_in [XENG_PER_NODE];
  logic [15:0] txd, lmd, vov [XENG_PER_NODE];

  tx_mux #(.N_XENG_TOT(N_XENG_TOT), .XENG_PER_NODE(XENG_PER_NODE), .DA_PORT(DA_PORT)) u_tx (
    .clk, .rst, .node_id, .xaui_in, .acc_in(acc_pkt), .acc_ready, .eth_tx, .eth_tx_dest,
    .loop_out(loop_pkt), .drops(txd));

  loopback_merge u_lb (
    .clk, .rst, .eth_rx, .loop_in(loop_pkt), .out(merged),
    .loop_released(stat_loop_released), .loop_forced(), .drops(lmd));

  pkt_switch #(.N_ANT(N_ANT), .N_XENG_TOT(N_XENG_TOT), .XENG_PER_NODE(XENG_PER_NODE)) u_sw (
    .clk, .rst, .node_id, .in(merged), .out(eng_in), .dropped(stat_switch_drops));

  for (genvar e = 0; e < XENG_PER_NODE; e++) begin : g_eng
    dual_pol4_t        smp;
    logic              wsync, wvalid;
    logic [MCNT_W-1:0] wid;
    logic              xv, xprev, xred;
    logic [7:0]        xi, xj, xblk, xst;
    logic [1:0]        xws;
    logic signed [ACC_W-1:0] xre [4], xim [4];
    logic              vv;
    logic [$clog2(CH_LOCAL)-1:0] vch;
    logic [MCNT_W-1:0] vsw;
    logic [7:0]        vblk, vst;
    logic signed [ACC_W-1:0] vre [4], vim [4];

    rx_buffer #(.N_ANT(N_ANT), .T_ACC(T_ACC), .N_WIN(N_WIN), .N_XENG_TOT(N_XENG_TOT), .TIMEOUT(TIMEOUT)) u_rx (
      .clk, .rst, .in(eng_in[e]), .out_sample(smp), .out_sync(wsync), .out_valid(wvalid), .out_win(wid),
      .accepted(stat_accepted[e]), .rejected(stat_rejected[e]), .timeouts(stat_timeouts[e]), .windows_read());

    xeng_core #(.N_ANT(N_ANT), .T_ACC(T_ACC), .ACC_W(ACC_W)) u_x (
      .clk, .rst, .in_sync(wsync), .in_sample(smp), .out_valid(xv), .out_i(xi), .out_j(xj),
      .out_blk(xblk), .out_stage(xst), .out_prev(xprev), .out_redundant(xred), .out_wsel(xws),
      .out_re(xre), .out_im(xim));

    win_valid #(.ACC_W(ACC_W), .CH_LOCAL(CH_LOCAL)) u_wv (
      .clk, .rst, .in_sync(wsync), .in_valid(wvalid), .in_win(wid), .x_valid(xv), .x_blk(xblk),
      .x_stage(xst), .x_wsel(xws), .x_re(xre), .x_im(xim), .out_valid(vv), .out_chan(vch),
      .out_sweep(vsw), .out_blk(vblk), .out_stage(vst), .out_re(vre), .out_im(vim),
      .valid_windows(stat_valid_windows[e]), .invalid_windows());

    vacc #(.N_ANT(N_ANT), .ACC_W(ACC_W), .CH_LOCAL(CH_LOCAL), .HOLD(2 * N_ANT * T_ACC)) u_acc (
      .clk, .rst, .acc_len, .engine_id(8'(int'(node_id) * XENG_PER_NODE + e)), .in_valid(vv),
      .in_chan(vch), .in_sweep(vsw), .in_blk(vblk), .in_stage(vst), .in_re(vre), .in_im(vim),
      .out(acc_pkt[e]), .out_ready(acc_ready[e]), .integrations(stat_integrations[e]), .overruns(vov[e]));
  end

  always_comb begin
    stat_overruns = txd + lmd;
    for (int e = 0; e < XENG_PER_NODE; e++) stat_overruns += vov[e];
  end
endmodule
