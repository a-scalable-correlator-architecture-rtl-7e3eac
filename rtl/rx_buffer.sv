// rx_buffer: packet filter and unscrambler in front of one X engine.
// A circular buffer of N_WIN windows (each N_ANT x T_ACC samples) stores
// packet payloads as they arrive. The engine's window number is
// lw = MCNT / N_XENG_TOT; its low bits pick the buffer slot and the antenna
// index picks the position in the window. Following the paper:
//  * sliding filter: a packet is accepted only when |lw - max_lw| <=
//    N_WIN/2 - 1 (the "+/- 3" of an 8-window buffer), where max_lw is the
//    highest window accepted so far; accepting a higher lw slides max_lw up;
//  * a window is flagged for readout once data arrives N_WIN/2 windows ahead
//    of it (max_lw - lw >= N_WIN/2), and is then read out contiguously at the
//    next window boundary of the free-running X engine;
//  * readout zeroes the window, so a lost packet gives zeros (loss of signal),
//    not stale data;
//  * time-out: if nothing is accepted for TIMEOUT clocks, the current MCNT is
//    abandoned and the next packet's MCNT is locked onto.
// This design's choices: zeroing is a per-slot, per-antenna "received" mask
// cleared on readout rather than a rewrite of the memory; each slot carries
// the window number it holds (a tag), so a reused slot starts clean; a
// window is flagged valid when at least one packet reached it; packets
// for windows already read out are rejected; TIMEOUT defaults to 16 windows.
// Interface: in is the packet stream for this engine (header word then
// T_ACC/4 payload words). Output: one dual-polarization sample per clock,
// antenna-major then time, N_ANT*T_ACC clocks per window; out_sync marks the
// first sample of every window, out_valid and out_win describe the window.
// Timing: a flagged window starts on the first window boundary after the
// packet that flagged it; output is registered.
module rx_buffer #(
  parameter int N_ANT      = 16,
  parameter int T_ACC      = 128,
  parameter int N_WIN      = 8,
  parameter int N_XENG_TOT = 16,
  parameter int TIMEOUT    = 16 * 16 * 128
) (
  input  logic                        clk,
  input  logic                        rst,
  input  corr_pkg::pkt_t              in,
  output corr_pkg::dual_pol4_t        out_sample,
  output logic                        out_sync,
  output logic                        out_valid,
  output logic [corr_pkg::MCNT_W-1:0] out_win,
  output logic [31:0]                 accepted,
  output logic [31:0]                 rejected,
  output logic [15:0]                 timeouts,
  output logic [31:0]                 windows_read
);
  import corr_pkg::*;
  localparam int XW   = $clog2(N_XENG_TOT);
  localparam int SLW  = $clog2(N_WIN);
  localparam int AW   = $clog2(N_ANT);
  localparam int NW   = T_ACC / 4;
  localparam int WW   = $clog2(NW);
  localparam int WIN  = N_ANT * T_ACC;
  localparam int WCW  = $clog2(WIN);
  localparam int TOL  = N_WIN / 2 - 1;
  localparam int TW   = $clog2(TIMEOUT + 1);

  logic [WORD_W-1:0] mem [N_WIN * N_ANT * NW];
  logic [N_ANT-1:0]  mask [N_WIN];
  logic [MCNT_W-1:0] tag  [N_WIN];

  logic              locked;
  logic [MCNT_W-1:0] max_lw, rd_lw;
  logic [TW-1:0]     idle;

  // packet being written
  logic              cur_ok;
  logic [SLW-1:0]    cur_slot;
  logic [AW-1:0]     cur_ant;
  logic [WW-1:0]     cur_w;

  // header decode
  logic [MCNT_W-1:0] lw;
  logic [ANT_W-1:0]  ant;
  logic signed [MCNT_W-1:0] d_max, d_rd;
  logic              acc_hdr;
  assign lw      = hdr_mcnt(in.data) >> XW;
  assign ant     = hdr_ant(in.data);
  assign d_max   = $signed(lw - max_lw);
  assign d_rd    = $signed(lw - rd_lw);
  assign acc_hdr = in.valid && in.sop && (int'(ant) < N_ANT) &&
                   (!locked || (d_max >= -TOL && d_max <= TOL && d_rd >= 0));

  // readout
  logic [WCW-1:0]    wcnt;
  logic [SLW-1:0]    rslot;
  logic [N_ANT-1:0]  rmask;
  logic              rvalid;
  logic [MCNT_W-1:0] rwin;
  logic              flag;
  logic [SLW-1:0]    nslot;
  assign flag  = locked && ($signed(max_lw - rd_lw) >= N_WIN / 2);
  assign nslot = rd_lw[SLW-1:0];

  logic [AW-1:0]  ra;
  logic [$clog2(T_ACC)-1:0] rt;
  assign ra = wcnt[WCW-1 -: AW];
  assign rt = wcnt[$clog2(T_ACC)-1:0];

  always_ff @(posedge clk) begin
    if (in.valid && !in.sop && cur_ok)
      mem[(int'(cur_slot) * N_ANT + int'(cur_ant)) * NW + int'(cur_w)] <= in.data;
  end

  always_ff @(posedge clk) begin
    logic [WORD_W-1:0] wd;
    wd         = mem[(int'(rslot) * N_ANT + int'(ra)) * NW + int'(rt[$clog2(T_ACC)-1:2])];
    out_sample <= rmask[ra] ? dual_pol4_t'(wd[16*rt[1:0] +: 16]) : '0;
    out_sync   <= (wcnt == '0);
    out_valid  <= rvalid;
    out_win    <= rwin;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked       <= 1'b0;
      max_lw       <= '0;
      rd_lw        <= '0;
      idle         <= '0;
      cur_ok       <= 1'b0;
      cur_slot     <= '0;
      cur_ant      <= '0;
      cur_w        <= '0;
      wcnt         <= '0;
      rslot        <= '0;
      rmask        <= '0;
      rvalid       <= 1'b0;
      rwin         <= '0;
      accepted     <= '0;
      rejected     <= '0;
      timeouts     <= '0;
      windows_read <= '0;
      for (int s = 0; s < N_WIN; s++) begin
        mask[s] <= '0;
        tag[s]  <= '0;
      end
    end else begin
      // readout scheduling at the window boundary
      wcnt <= (wcnt == WCW'(WIN - 1)) ? '0 : wcnt + 1'b1;
      if (wcnt == WCW'(WIN - 1)) begin
        if (flag) begin
          rslot        <= nslot;
          rmask        <= (tag[nslot] == rd_lw) ? mask[nslot] : '0;
          rvalid       <= (tag[nslot] == rd_lw) && (mask[nslot] != '0);
          rwin         <= rd_lw;
          mask[nslot]  <= '0;
          rd_lw        <= rd_lw + 1'b1;
          windows_read <= windows_read + 1'b1;
        end else begin
          rmask  <= '0;
          rvalid <= 1'b0;
        end
      end

      // packet header: filter and place
      if (in.valid && in.sop) begin
        cur_ok   <= acc_hdr;
        cur_slot <= lw[SLW-1:0];
        cur_ant  <= AW'(ant);
        cur_w    <= '0;
        if (acc_hdr) begin
          accepted <= accepted + 1'b1;
          idle     <= '0;
          if (!locked) begin
            locked <= 1'b1;
            max_lw <= lw;
            rd_lw  <= lw;
          end else if (d_max > 0) begin
            max_lw <= lw;
          end
          if (tag[lw[SLW-1:0]] != lw) begin
            tag[lw[SLW-1:0]]  <= lw;
            mask[lw[SLW-1:0]] <= N_ANT'(1) << ant;
          end else begin
            mask[lw[SLW-1:0]][AW'(ant)] <= 1'b1;
          end
        end else begin
          rejected <= rejected + 1'b1;
        end
      end else begin
        if (in.valid && cur_ok) cur_w <= cur_w + 1'b1;
        if (locked) begin
          if (idle == TW'(TIMEOUT)) begin
            locked   <= 1'b0;
            idle     <= '0;
            timeouts <= timeouts + 1'b1;
          end else begin
            idle <= idle + 1'b1;
          end
        end
      end
    end
  end
endmodule
