// pkt_switch: "Parse Header, Switch by MCNT". Reads the header word of each
// packet and forwards the whole packet to the local X engine that owns its
// MCNT: X engine g = MCNT mod N_XENG_TOT handles every N_XENG_TOT-th channel,
// and local engine g mod XENG_PER_NODE of processor g / XENG_PER_NODE.
// Packets for another processor, output packets (antenna field all ones) and
// packets with an antenna index of N_ANT or more are dropped and counted.
// The routing rule is the paper's (static addressing, each X engine takes
// every 16th channel); the drop rules are this design's choices.
// Timing: one clock of latency, no backpressure.
module pkt_switch #(
  parameter int N_ANT         = 16,
  parameter int N_XENG_TOT    = 16,
  parameter int XENG_PER_NODE = 2
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [7:0]     node_id,
  input  corr_pkg::pkt_t in,
  output corr_pkg::pkt_t out [XENG_PER_NODE],
  output logic [15:0]    dropped
);
  import corr_pkg::*;
  localparam int XW = $clog2(N_XENG_TOT);

  logic [7:0] sel_q, sel;
  logic       keep_q, keep;
  logic [XW-1:0] g;
  assign g = hdr_mcnt(in.data)[XW-1:0];

  always_comb begin
    sel  = sel_q;
    keep = keep_q;
    if (in.sop) begin
      sel  = 8'(int'(g) % XENG_PER_NODE);
      keep = (8'(int'(g) / XENG_PER_NODE) == node_id) &&
             (hdr_ant(in.data) != ACC_PKT_ID) && (int'(hdr_ant(in.data)) < N_ANT);
    end
  end

  always_ff @(posedge clk) begin
    for (int e = 0; e < XENG_PER_NODE; e++) begin
      out[e] <= '{valid: in.valid && keep && (int'(sel) == e), sop: in.sop, eop: in.eop, data: in.data};
    end
    if (rst) begin
      sel_q   <= '0;
      keep_q  <= 1'b0;
      dropped <= '0;
    end else if (in.valid) begin
      sel_q  <= sel;
      keep_q <= keep;
      if (in.sop && !keep) dropped <= dropped + 1'b1;
    end
  end
endmodule
