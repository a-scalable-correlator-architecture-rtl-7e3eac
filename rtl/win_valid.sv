// win_valid: "Window Valid" bookkeeping for one X engine. The X engine runs
// freely and computes on valid and invalid windows alike; this block records,
// at every window start, whether the receive buffer delivered a valid window
// and which engine window number (hence channel) it was, and attaches that
// to each X-engine result using the result's window count (the engine tags
// results from the previous window, produced while the next one streams in).
// Results of invalid windows are marked invalid here. The channel of a window
// is chan = win mod CH_LOCAL and its sweep (one pass over the engine's
// channels) is win / CH_LOCAL, with CH_LOCAL = NCHAN / N_XENG_TOT channels
// per engine. The paper only names the block; this realization is this
// design's choice.
// Timing: outputs registered one clock after the X-engine result.
module win_valid #(
  parameter int ACC_W    = 17,
  parameter int CH_LOCAL = 128
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_sync,
  input  logic                        in_valid,
  input  logic [corr_pkg::MCNT_W-1:0] in_win,
  input  logic                        x_valid,
  input  logic [7:0]                  x_blk,
  input  logic [7:0]                  x_stage,
  input  logic [1:0]                  x_wsel,
  input  logic signed [ACC_W-1:0]     x_re [4],
  input  logic signed [ACC_W-1:0]     x_im [4],
  output logic                        out_valid,
  output logic [$clog2(CH_LOCAL)-1:0] out_chan,
  output logic [corr_pkg::MCNT_W-1:0] out_sweep,
  output logic [7:0]                  out_blk,
  output logic [7:0]                  out_stage,
  output logic signed [ACC_W-1:0]     out_re [4],
  output logic signed [ACC_W-1:0]     out_im [4],
  output logic [31:0]                 valid_windows,
  output logic [31:0]                 invalid_windows
);
  localparam int CW = $clog2(CH_LOCAL);
  logic [1:0]                  wseq;
  logic                        hv [4];
  logic [corr_pkg::MCNT_W-1:0] hid [4];

  always_ff @(posedge clk) begin
    if (rst) begin
      wseq            <= '0;
      valid_windows   <= '0;
      invalid_windows <= '0;
      for (int k = 0; k < 4; k++) begin
        hv[k]  <= 1'b0;
        hid[k] <= '0;
      end
    end else if (in_sync) begin
      wseq          <= wseq + 1'b1;
      hv[wseq + 1'b1]  <= in_valid;
      hid[wseq + 1'b1] <= in_win;
      if (in_valid) valid_windows <= valid_windows + 1'b1;
      else          invalid_windows <= invalid_windows + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    out_valid <= !rst && x_valid && hv[x_wsel];
    out_chan  <= hid[x_wsel][CW-1:0];
    out_sweep <= hid[x_wsel] >> CW;
    out_blk   <= x_blk;
    out_stage <= x_stage;
    out_re    <= x_re;
    out_im    <= x_im;
  end
endmodule
