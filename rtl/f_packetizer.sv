// f_packetizer: reads a completed corner-turn bank and sends it as packets
// over the point-to-point XAUI link. For every channel and every antenna of
// the F processor it sends one packet: a header word holding the 2-byte
// antenna index and the 6-byte master counter MCNT, then T_ACC/4 payload
// words of four 16-bit samples (both polarizations, 4-bit complex) each,
// T_ACC time samples in all (256 payload bytes at T_ACC = 128).
// MCNT = time_block * NCHAN + channel: it advances once per channel sent, its
// low bits count channels within a spectrum and the rest count time, as in
// the paper; the two antennas of one channel share one MCNT.
// The header layout and the word packing are this design's choices.
// Packets are paced: one packet starts every PERIOD = T_ACC/ANT clocks, so a
// bank of NCHAN*ANT packets is spread evenly over the NCHAN*T_ACC clocks in
// which the next bank fills, and the X engines see a steady packet rate
// rather than bursts followed by long silences (which would look like lost
// data to their receive buffers). The pacing is this design's choice.
// Timing: the stream has no backpressure; packets are 1 + T_ACC/4 words
// long. rd_* address the corner turn, whose data returns one clock later.
module f_packetizer #(
  parameter int NCHAN = 2048,
  parameter int T_ACC = 128,
  parameter int ANT   = 2
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [15:0]                 ant_base,
  input  logic                        bank_ready,
  input  logic                        ready_bank,
  input  logic [corr_pkg::MCNT_W-1:0] ready_block,
  output logic                        rd_bank,
  output logic [$clog2(NCHAN)-1:0]    rd_chan,
  output logic [$clog2(T_ACC/4)-1:0]  rd_word,
  input  logic [4*16*ANT-1:0]         rd_data,
  output corr_pkg::pkt_t              out,
  output logic [15:0]                 overruns
);
  localparam int CW  = $clog2(NCHAN);
  localparam int NW  = T_ACC / 4;
  localparam int WW  = $clog2(NW + 1);
  localparam int AIW = (ANT > 1) ? $clog2(ANT) : 1;
  localparam int PERIOD = (T_ACC / ANT > NW + 1) ? T_ACC / ANT : NW + 1;
  localparam int GW  = $clog2(PERIOD + 1);

  logic [GW-1:0] gap;   // clocks until the next packet may start

  logic          busy;
  logic [WW-1:0] w;
  logic [AIW-1:0] ant;
  logic [corr_pkg::MCNT_W-1:0] block;

  assign rd_word = $bits(rd_word)'(w);   // word w is read in state w, used in state w+1

  always_ff @(posedge clk) begin
    out.valid <= 1'b0;
    out.sop   <= 1'b0;
    out.eop   <= 1'b0;
    if (rst) begin
      busy     <= 1'b0;
      overruns <= '0;
      rd_bank  <= 1'b0;
      rd_chan  <= '0;
      w        <= '0;
      ant      <= '0;
      block    <= '0;
      gap      <= '0;
    end else begin
      if (gap != '0) gap <= gap - 1'b1;
      if (bank_ready) begin
        if (busy) overruns <= overruns + 1'b1;
        busy    <= 1'b1;
        rd_bank <= ready_bank;
        block   <= ready_block;
        rd_chan <= '0;
        ant     <= '0;
        w       <= '0;
      end else if (busy && (w != '0 || gap == '0)) begin
        out.valid <= 1'b1;
        if (w == '0) begin
          gap      <= GW'(PERIOD - 1);
          out.sop  <= 1'b1;
          out.data <= {ant_base + 16'(ant), (block << CW) | corr_pkg::MCNT_W'(rd_chan)};
        end else begin
          for (int i = 0; i < 4; i++) out.data[16*i +: 16] <= rd_data[16*ANT*i + 16*int'(ant) +: 16];
        end
        if (w == WW'(NW)) begin
          out.eop <= 1'b1;
          w       <= '0;
          if (ant == AIW'(ANT - 1)) begin
            ant <= '0;
            if (rd_chan == CW'(NCHAN - 1)) busy <= 1'b0;
            else rd_chan <= rd_chan + 1'b1;
          end else begin
            ant <= ant + 1'b1;
          end
        end else begin
          w <= w + 1'b1;
        end
      end
    end
  end
endmodule
