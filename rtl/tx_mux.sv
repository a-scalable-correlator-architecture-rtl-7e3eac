// tx_mux: transmit side of an X processor ("Mux XAUI and ACC").
// F-engine packets arrive from the XAUI link without backpressure. Each
// packet's destination X processor follows from its MCNT (X engine
// g = MCNT mod N_XENG_TOT, processor g / XENG_PER_NODE). Packets addressed to
// this processor are diverted whole to the loopback output, since a switch
// does not return self-addressed packets; the others are buffered and sent to
// the 10GbE core with that destination. Accumulated-output packets of the
// local X engines (valid/ready streams) are sent to the data-acquisition
// port DA_PORT in the gaps: at each packet boundary a complete buffered
// XAUI packet goes first, otherwise the output streams are served in turn.
// The paper names the multiplexer and the loopback; the arbitration and the
// store-and-forward buffering are this design's choices.
// Timing: XAUI packets leave after being fully buffered; eth_tx_dest is valid
// on every word of a packet.
module tx_mux #(
  parameter int N_XENG_TOT    = 16,
  parameter int XENG_PER_NODE = 2,
  parameter int DA_PORT       = 8,
  parameter int FIFO_DEPTH    = 512
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [7:0]     node_id,
  input  corr_pkg::pkt_t xaui_in,
  input  corr_pkg::pkt_t acc_in [XENG_PER_NODE],
  output logic           acc_ready [XENG_PER_NODE],
  output corr_pkg::pkt_t eth_tx,
  output logic [7:0]     eth_tx_dest,
  output corr_pkg::pkt_t loop_out,
  output logic [15:0]    drops
);
  import corr_pkg::*;
  localparam int XW = $clog2(N_XENG_TOT);

  function automatic logic [7:0] dest_of(input logic [WORD_W-1:0] hdr);
    logic [XW-1:0] g;
    g = hdr_mcnt(hdr)[XW-1:0];
    return 8'(int'(g) / XENG_PER_NODE);
  endfunction

  // route XAUI packets: self-addressed -> loopback, else -> buffer
  logic self_pkt;
  logic is_self;
  assign is_self = xaui_in.sop ? (dest_of(xaui_in.data) == node_id) : self_pkt;
  always_ff @(posedge clk) begin
    if (rst) self_pkt <= 1'b0;
    else if (xaui_in.valid && xaui_in.sop) self_pkt <= (dest_of(xaui_in.data) == node_id);
  end

  always_ff @(posedge clk) begin
    loop_out <= '{valid: xaui_in.valid && is_self, sop: xaui_in.sop, eop: xaui_in.eop, data: xaui_in.data};
  end

  logic         f_push, f_pop, f_empty, f_full, f_ovf;
  logic [65:0]  f_dout;
  logic [$clog2(FIFO_DEPTH):0] f_count;
  logic [15:0]  pkts_in_fifo;
  assign f_push = xaui_in.valid && !is_self;
  sync_fifo #(.W(66), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .push(f_push), .din({xaui_in.sop, xaui_in.eop, xaui_in.data}),
    .pop(f_pop), .dout(f_dout), .empty(f_empty), .full(f_full), .count(f_count), .overflow(f_ovf));

  // output arbiter
  localparam int SW = $clog2(XENG_PER_NODE + 1);
  logic [SW-1:0] src;       // 0 = XAUI buffer, 1.. = accumulator outputs
  logic          active;
  logic [SW-1:0] rr;
  logic [7:0]    cur_dest;
  logic          word_ok;
  logic          word_eop;
  logic [WORD_W-1:0] word_data;
  logic          word_sop;

  always_comb begin
    word_ok = 1'b0; word_eop = 1'b0; word_sop = 1'b0; word_data = '0;
    f_pop = 1'b0;
    for (int e = 0; e < XENG_PER_NODE; e++) acc_ready[e] = 1'b0;
    if (active) begin
      if (src == '0) begin
        word_ok = !f_empty; f_pop = !f_empty;
        word_sop = f_dout[65]; word_eop = f_dout[64]; word_data = f_dout[63:0];
      end else begin
        for (int e = 0; e < XENG_PER_NODE; e++)
          if (int'(src) == e + 1) begin
            acc_ready[e] = 1'b1;
            word_ok = acc_in[e].valid; word_sop = acc_in[e].sop;
            word_eop = acc_in[e].eop; word_data = acc_in[e].data;
          end
      end
    end
  end

  always_ff @(posedge clk) begin
    eth_tx.valid <= 1'b0;
    eth_tx.sop   <= 1'b0;
    eth_tx.eop   <= 1'b0;
    if (rst) begin
      active       <= 1'b0;
      src          <= '0;
      rr           <= '0;
      drops        <= '0;
      pkts_in_fifo <= '0;
      cur_dest     <= '0;
    end else begin
      pkts_in_fifo <= pkts_in_fifo + 16'(f_push && xaui_in.eop && !f_full)
                                   - 16'(active && src == '0 && word_ok && word_eop);
      if (f_ovf) drops <= drops + 1'b1;
      if (!active) begin
        if (pkts_in_fifo != '0) begin
          active   <= 1'b1;
          src      <= '0;
          cur_dest <= dest_of(f_dout[63:0]);
        end else begin
          automatic logic found = 1'b0;
          for (int k = 0; k < XENG_PER_NODE; k++) begin
            automatic int e = (int'(rr) + k) % XENG_PER_NODE;
            if (!found && acc_in[e].valid && acc_in[e].sop) begin
              found = 1'b1;
              active   <= 1'b1;
              src      <= SW'(e + 1);
              rr       <= SW'((e + 1) % XENG_PER_NODE);
              cur_dest <= 8'(DA_PORT);
            end
          end
        end
      end else if (word_ok) begin
        eth_tx.valid <= 1'b1;
        eth_tx.sop   <= word_sop;
        eth_tx.eop   <= word_eop;
        eth_tx.data  <= word_data;
        eth_tx_dest  <= cur_dest;
        if (word_eop) active <= 1'b0;
      end
    end
  end
endmodule
