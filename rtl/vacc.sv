// vacc: long-term vector accumulator of one X engine ("DRAM ACC"), with the
// count of accumulated windows. Every valid X-engine result is added into an
// entry [channel][block*S + stage] (S = floor(N_ANT/2)+1 results per block),
// four polarization products per entry, so that integrations far longer than
// T_ACC samples are possible. An integration covers acc_len sweeps over the
// engine's CH_LOCAL channels. The memory is double-buffered: when a result of
// a later integration arrives, accumulation moves to the other bank and,
// HOLD clocks later (so that the trailing previous-window results still reach
// the old bank), the finished bank is read out at low bandwidth as packets
// and zeroed as it is read. Per channel a count of accumulated valid windows
// is kept and sent for normalization.
// Output packet per (channel, block): word 0 = {16'hFFFF, engine_id[7:0],
// count[15:0], channel[15:0], block[7:0]}, word 1 = {16'(acc_len), start sweep
// of the integration [47:0]}, then for stage 0..S-1 and polarization XX, YY,
// XY, YX one word {re[31:0], im[31:0]}. Valid/ready stream.
// The paper gives the function (accumulation in DRAM, slow readout over
// 10GbE, a count for normalization); the memory is written here as an
// on-chip array and the banking, packet format and widths are this design's
// choices. The readout of one integration must finish within the next one
// (acc_len >= 2 at full size); a swap during readout is counted in overruns.
module vacc #(
  parameter int N_ANT    = 16,
  parameter int ACC_W    = 17,
  parameter int CH_LOCAL = 128,
  parameter int VW       = 32,
  parameter int HOLD     = 2 * 16 * 128
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [15:0]                 acc_len,
  input  logic [7:0]                  engine_id,
  input  logic                        in_valid,
  input  logic [$clog2(CH_LOCAL)-1:0] in_chan,
  input  logic [corr_pkg::MCNT_W-1:0] in_sweep,
  input  logic [7:0]                  in_blk,
  input  logic [7:0]                  in_stage,
  input  logic signed [ACC_W-1:0]     in_re [4],
  input  logic signed [ACC_W-1:0]     in_im [4],
  output corr_pkg::pkt_t              out,
  input  logic                        out_ready,
  output logic [15:0]                 integrations,
  output logic [15:0]                 overruns
);
  import corr_pkg::*;
  localparam int S   = N_ANT / 2 + 1;
  localparam int NE  = N_ANT * S;
  localparam int CW  = $clog2(CH_LOCAL);
  localparam int EW  = $clog2(NE);
  localparam int NDW = 2 + 4 * S;        // words per output packet
  localparam int DWW = $clog2(NDW);
  localparam int HW  = $clog2(HOLD + 1);

  // entry memory addressed {bank, channel, entry}; count memory {bank, channel}
  localparam int NEP = 1 << EW;
  logic [8*VW-1:0] mem [2 * CH_LOCAL * NEP];
  logic [15:0]     cnt [2 * CH_LOCAL];

  logic              started, bank;
  logic [MCNT_W-1:0] cur_start, old_start;
  logic              pend, dumping;
  logic [HW-1:0]     hold;
  logic              dbank;

  // target bank of the incoming result
  logic signed [MCNT_W-1:0] rel;
  logic new_int, trailing, tbank, do_acc;
  assign rel      = $signed(in_sweep - cur_start);
  assign new_int  = in_valid && started && (rel >= $signed(MCNT_W'(acc_len)));
  assign trailing = in_valid && started && (rel < 0);
  assign tbank    = (new_int ? ~bank : (trailing ? ~bank : bank));
  assign do_acc   = in_valid && !(trailing && dumping);

  logic [EW-1:0] ein;
  assign ein = EW'(int'(in_blk) * S + int'(in_stage));

  // readout walk
  logic [CW-1:0]  dchan;
  logic [7:0]     dblk;
  logic [DWW-1:0] dw;
  logic           f_push, f_empty, f_full, f_ovf;
  logic [65:0]    f_dout;
  logic [4:0]     f_count;
  logic [65:0]    f_din;
  logic [EW-1:0]  eout;
  int             dst, dpol;
  assign dst  = (int'(dw) - 2) / 4;
  assign dpol = (int'(dw) - 2) % 4;
  assign eout = EW'(int'(dblk) * S + dst);
  assign f_push = dumping && (f_count < 5'd12);

  always_comb begin
    logic [8*VW-1:0] e;
    e = mem[{dbank, dchan, eout}];
    if (dw == '0)
      f_din = {1'b1, 1'b0, ACC_PKT_ID, engine_id, cnt[{dbank, dchan}], 16'(dchan), dblk};
    else if (dw == DWW'(1))
      f_din = {1'b0, 1'b0, acc_len, old_start};
    else
      f_din = {1'b0, (dw == DWW'(NDW - 1)), e[2*VW*dpol +: 2*VW]};
  end

  sync_fifo #(.W(66), .DEPTH(16)) u_of (
    .clk, .rst, .push(f_push), .din(f_din), .pop(out_ready), .dout(f_dout),
    .empty(f_empty), .full(f_full), .count(f_count), .overflow(f_ovf));
  assign out.valid = !f_empty;
  assign out.sop   = f_dout[65];
  assign out.eop   = f_dout[64];
  assign out.data  = f_dout[63:0];

  // read-modify-write of the addressed entry
  logic [8*VW-1:0] acc_old, acc_new;
  assign acc_old = mem[{tbank, in_chan, ein}];
  always_comb
    for (int p = 0; p < 4; p++) begin
      acc_new[2*VW*p + VW +: VW] = acc_old[2*VW*p + VW +: VW] + VW'(in_re[p]);
      acc_new[2*VW*p +: VW]      = acc_old[2*VW*p +: VW] + VW'(in_im[p]);
    end

  always_ff @(posedge clk) begin
    // accumulate
    if (do_acc) begin
      mem[{tbank, in_chan, ein}] <= acc_new;
      if (in_blk == '0 && in_stage == '0) cnt[{tbank, in_chan}] <= cnt[{tbank, in_chan}] + 1'b1;
    end
    // zero on readout (always the other bank than the one accumulating)
    if (f_push && int'(dw) >= 2 && dpol == 3) mem[{dbank, dchan, eout}] <= '0;
    if (f_push && dw == DWW'(NDW - 1) && dblk == 8'(N_ANT - 1)) cnt[{dbank, dchan}] <= '0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      started      <= 1'b0;
      bank         <= 1'b0;
      cur_start    <= '0;
      old_start    <= '0;
      pend         <= 1'b0;
      dumping      <= 1'b0;
      hold         <= '0;
      dbank        <= 1'b0;
      dchan        <= '0;
      dblk         <= '0;
      dw           <= '0;
      integrations <= '0;
      overruns     <= '0;
    end else begin
      if (in_valid && !started) begin
        started   <= 1'b1;
        cur_start <= in_sweep;
      end
      if (new_int) begin
        if (pend || dumping) overruns <= overruns + 1'b1;
        bank      <= ~bank;
        cur_start <= in_sweep;
        old_start <= cur_start;
        pend      <= 1'b1;
        hold      <= HW'(HOLD);
        dbank     <= bank;
      end else if (pend) begin
        if (hold == '0) begin
          pend    <= 1'b0;
          dumping <= 1'b1;
          dchan   <= '0;
          dblk    <= '0;
          dw      <= '0;
        end else begin
          hold <= hold - 1'b1;
        end
      end
      if (f_push) begin
        if (dw == DWW'(NDW - 1)) begin
          dw <= '0;
          if (dblk == 8'(N_ANT - 1)) begin
            dblk <= '0;
            if (dchan == CW'(CH_LOCAL - 1)) begin
              dumping      <= 1'b0;
              integrations <= integrations + 1'b1;
            end else begin
              dchan <= dchan + 1'b1;
            end
          end else begin
            dblk <= dblk + 1'b1;
          end
        end else begin
          dw <= dw + 1'b1;
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < 2 * CH_LOCAL; i++) cnt[i] = '0;
    for (int i = 0; i < 2 * CH_LOCAL * NEP; i++) mem[i] = '0;
  end
endmodule
