// corner_turn: the matrix transpose that turns spectra into frequency-based
// packets. Spectra arrive one channel per clock (all ANT antennas, both
// polarizations, 4-bit complex each) and are written into one bank of a
// double-buffered memory as [channel][time]; after T_ACC spectra the bank
// is complete, its time-block number is announced with bank_ready, and
// writing moves to the other bank while a reader (f_packetizer) takes the
// finished one out channel by channel. Following the paper: 2048 channels by
// 128 spectra, double-buffered (the IBOB's SRAM). This design's choices: the
// memory word holds 4 consecutive spectra of one channel (so one read gives
// one 64-bit packet word per antenna); in_sync (channel 0 of the first
// spectrum after the 1PPS reset event) restarts time block 0 and bank 0.
// Timing: rd_data is registered, one clock after rd_addr. bank_ready pulses
// on the clock after the last channel of spectrum T_ACC-1 is written.
module corner_turn #(
  parameter int NCHAN = 2048,
  parameter int T_ACC = 128,
  parameter int ANT   = 2
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_sync,
  input  corr_pkg::dual_pol4_t        in_data [ANT],
  output logic                        bank_ready,
  output logic                        ready_bank,
  output logic [corr_pkg::MCNT_W-1:0] ready_block,
  input  logic                        rd_bank,
  input  logic [$clog2(NCHAN)-1:0]    rd_chan,
  input  logic [$clog2(T_ACC/4)-1:0]  rd_word,
  output logic [4*16*ANT-1:0]         rd_data     // [spectrum lane][antenna] samples
);
  localparam int CW = $clog2(NCHAN);
  localparam int SW = $clog2(T_ACC);
  localparam int LW = 16 * ANT;   // one spectrum of one channel, all antennas

  localparam int MW = 1 + CW + SW - 2;   // {bank, channel, word} address
  logic            run, bank;
  logic [CW-1:0]   chan;
  logic [SW-1:0]   spec;
  logic [corr_pkg::MCNT_W-1:0] block;

  logic [LW-1:0] lane;
  always_comb
    for (int a = 0; a < ANT; a++) lane[16*a +: 16] = in_data[a];

  logic          wr_en;
  logic [CW-1:0] wchan;
  logic [SW-1:0] wspec;
  assign wr_en = run || in_sync;
  assign wchan = in_sync ? '0 : chan;
  assign wspec = in_sync ? '0 : spec;

  logic [MW-1:0] waddr, raddr;
  assign waddr = {in_sync ? 1'b0 : bank, wchan, wspec[SW-1:2]};
  assign raddr = {rd_bank, rd_chan, rd_word};

  // one memory per lane (spectrum index mod 4) of the 64-bit packet word
  for (genvar l = 0; l < 4; l++) begin : g_lane
    logic [LW-1:0] mem [2 * NCHAN * T_ACC / 4];
    always_ff @(posedge clk) begin
      if (wr_en && wspec[1:0] == 2'(l)) mem[waddr] <= lane;
      rd_data[LW*l +: LW] <= mem[raddr];
    end
  end

  always_ff @(posedge clk) begin
    bank_ready <= 1'b0;
    if (rst) begin
      run   <= 1'b0;
      bank  <= 1'b0;
      chan  <= '0;
      spec  <= '0;
      block <= '0;
    end else if (in_sync) begin
      run   <= 1'b1;
      bank  <= 1'b0;
      chan  <= CW'(1);
      spec  <= '0;
      block <= '0;
    end else if (run) begin
      chan <= chan + 1'b1;
      if (chan == CW'(NCHAN - 1)) begin
        spec <= spec + 1'b1;
        if (spec == SW'(T_ACC - 1)) begin
          bank_ready  <= 1'b1;
          ready_bank  <= bank;
          ready_block <= block;
          bank        <= ~bank;
          block       <= block + 1'b1;
        end
      end
    end
  end
endmodule
