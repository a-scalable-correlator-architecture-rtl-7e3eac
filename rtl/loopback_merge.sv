// loopback_merge: receive-side merge of switch traffic and loopback packets
// ("Loopback" buffer and "Mux 10 GbE and Loop").
// Packets from the 10GbE core and self-addressed packets from tx_mux arrive
// without backpressure and are buffered in two FIFOs; whole packets leave one
// at a time. As the paper prescribes, a loopback packet is released only
// after a packet with the same (or a later) MCNT has come through the
// switch, so that switch latency does not widen the spread of MCNTs seen by
// the receive buffer. This design's choices: a released loopback packet goes
// ahead of waiting switch packets; a loopback FIFO more than 3/4 full
// releases its head anyway (so a silent switch cannot stall loopback data);
// MCNTs are compared as signed differences so counter wrap is harmless.
// Timing: output is a packet stream without backpressure, one word per clock.
module loopback_merge #(
  parameter int RX_DEPTH   = 512,
  parameter int LOOP_DEPTH = 1024
) (
  input  logic           clk,
  input  logic           rst,
  input  corr_pkg::pkt_t eth_rx,
  input  corr_pkg::pkt_t loop_in,
  output corr_pkg::pkt_t out,
  output logic [31:0]    loop_released,   // loopback packets inserted
  output logic [31:0]    loop_forced,     // of those, released by the fill limit
  output logic [15:0]    drops
);
  import corr_pkg::*;

  logic [MCNT_W-1:0] max_rx_mcnt;
  logic              rx_seen;

  logic        r_pop, r_empty, r_full, r_ovf;
  logic        l_pop, l_empty, l_full, l_ovf;
  logic [65:0] r_dout, l_dout;
  logic [$clog2(RX_DEPTH):0]   r_count;
  logic [$clog2(LOOP_DEPTH):0] l_count;
  logic [15:0] r_pkts, l_pkts;

  sync_fifo #(.W(66), .DEPTH(RX_DEPTH)) u_rx (
    .clk, .rst, .push(eth_rx.valid), .din({eth_rx.sop, eth_rx.eop, eth_rx.data}),
    .pop(r_pop), .dout(r_dout), .empty(r_empty), .full(r_full), .count(r_count), .overflow(r_ovf));
  sync_fifo #(.W(66), .DEPTH(LOOP_DEPTH)) u_lp (
    .clk, .rst, .push(loop_in.valid), .din({loop_in.sop, loop_in.eop, loop_in.data}),
    .pop(l_pop), .dout(l_dout), .empty(l_empty), .full(l_full), .count(l_count), .overflow(l_ovf));

  logic active, from_loop;
  logic loop_due, loop_force;
  logic signed [MCNT_W-1:0] diff;
  assign diff       = MCNT_W'(max_rx_mcnt - hdr_mcnt(l_dout[63:0]));
  assign loop_force = (l_count > ($bits(l_count))'(LOOP_DEPTH * 3 / 4));
  assign loop_due   = (l_pkts != '0) && ((rx_seen && diff >= 0) || loop_force);

  assign r_pop = active && !from_loop;
  assign l_pop = active && from_loop;

  always_ff @(posedge clk) begin
    out.valid <= 1'b0;
    out.sop   <= 1'b0;
    out.eop   <= 1'b0;
    if (rst) begin
      active        <= 1'b0;
      from_loop     <= 1'b0;
      max_rx_mcnt   <= '0;
      rx_seen       <= 1'b0;
      r_pkts        <= '0;
      l_pkts        <= '0;
      loop_released <= '0;
      loop_forced   <= '0;
      drops         <= '0;
    end else begin
      if (eth_rx.valid && eth_rx.sop && hdr_ant(eth_rx.data) != ACC_PKT_ID) begin
        if (!rx_seen || $signed(MCNT_W'(hdr_mcnt(eth_rx.data) - max_rx_mcnt)) > 0)
          max_rx_mcnt <= hdr_mcnt(eth_rx.data);
        rx_seen <= 1'b1;
      end
      r_pkts <= r_pkts + 16'(eth_rx.valid && eth_rx.eop && !r_full)
                       - 16'(r_pop && !r_empty && r_dout[64]);
      l_pkts <= l_pkts + 16'(loop_in.valid && loop_in.eop && !l_full)
                       - 16'(l_pop && !l_empty && l_dout[64]);
      if (r_ovf || l_ovf) drops <= drops + 1'b1;
      if (!active) begin
        if (loop_due) begin
          active        <= 1'b1;
          from_loop     <= 1'b1;
          loop_released <= loop_released + 1'b1;
          if (!(rx_seen && diff >= 0)) loop_forced <= loop_forced + 1'b1;
        end else if (r_pkts != '0) begin
          active    <= 1'b1;
          from_loop <= 1'b0;
        end
      end else begin
        if (from_loop ? !l_empty : !r_empty) begin
          out.valid <= 1'b1;
          out.sop   <= from_loop ? l_dout[65] : r_dout[65];
          out.eop   <= from_loop ? l_dout[64] : r_dout[64];
          out.data  <= from_loop ? l_dout[63:0] : r_dout[63:0];
          if (from_loop ? l_dout[64] : r_dout[64]) active <= 1'b0;
        end
      end
    end
  end
endmodule
