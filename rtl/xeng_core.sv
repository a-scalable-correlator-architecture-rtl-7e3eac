// xeng_core: the pipelined cross-multiply/accumulate (X) engine.
// Input is a free-running stream of windows; a window is N_ANT blocks in
// series, block a holding T_ACC samples (both polarizations, 4-bit complex) of
// antenna a for one frequency channel. A chain of N_ANT delays of T_ACC
// samples makes the same time sample of earlier blocks available. Stage s
// (s = 0 .. floor(N_ANT/2)) pairs blocks that are s apart: while block a >= s
// streams in, it multiplies antenna a-s of this window with antenna a; while
// a < s, where separation s would mix two windows, it switches to separation
// N_ANT-s inside the previous window (antennas a and a+N_ANT-s, taken from the
// taps N_ANT*T_ACC and s*T_ACC back). Each stage forms the four polarization
// products XX*, YY*, XY*, YX* with parallel complex multipliers and sums them
// over the T_ACC samples of a block; at every block end the
// floor(N_ANT/2)+1 sums are loaded into an output shift register and
// shifted out, one per clock, which needs T_ACC > floor(N_ANT/2)+1.
// Conventions (the paper's): V_ij = x_i * conj(x_j) with i < j.
// All of this follows the paper's X engine; the single (unskewed) pipeline,
// the tag outputs and the order of the shift register (stage 0 first) are
// this design's choices. The engine processes valid and invalid data alike;
// validity is tracked outside (win_valid) using out_wsel, the window count
// (mod 4, counted in in_sync pulses) of the window the result belongs to.
// Timing: in_sync marks the first sample of a window. The results of block a
// appear on the outputs, one per clock, from the second clock edge after the
// edge that takes in its last sample.
// For even N_ANT the results of stage N_ANT/2 for a < N_ANT/2 repeat
// baselines already produced (out_redundant).
module xeng_core #(
  parameter int N_ANT  = 16,
  parameter int T_ACC  = 128,
  parameter int B      = 4,
  parameter int ACC_W  = 2 * B + 2 + $clog2(T_ACC)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_sync,
  input  corr_pkg::dual_pol4_t in_sample,
  output logic                 out_valid,
  output logic [7:0]           out_i,
  output logic [7:0]           out_j,
  output logic [7:0]           out_blk,
  output logic [7:0]           out_stage,
  output logic                 out_prev,
  output logic                 out_redundant,
  output logic [1:0]           out_wsel,
  output logic signed [ACC_W-1:0] out_re [4],   // XX, YY, XY, YX
  output logic signed [ACC_W-1:0] out_im [4]
);
  localparam int S  = N_ANT / 2 + 1;
  localparam int AW = $clog2(N_ANT);
  localparam int TW = $clog2(T_ACC);

  // delay taps: d[k] = input delayed by k*T_ACC
  logic [15:0] d [N_ANT+1];
  assign d[0] = in_sample;
  for (genvar k = 0; k < N_ANT; k++) begin : g_dl
    delay_line #(.W(16), .DEPTH(T_ACC)) u_dl (.clk, .din(d[k]), .dout(d[k+1]));
  end

  // block / sample counters
  logic [AW-1:0] blk_q, blk;
  logic [TW-1:0] t_q, t;
  logic [1:0]    wseq_q, wseq;
  always_comb begin
    if (in_sync) begin
      t = '0; blk = '0; wseq = wseq_q + 1'b1;
    end else begin
      t = t_q + 1'b1;
      blk = blk_q;
      wseq = wseq_q;
      if (t_q == TW'(T_ACC - 1)) begin
        blk = blk_q + 1'b1;
        if (blk_q == AW'(N_ANT - 1)) wseq = wseq_q + 1'b1;
      end
    end
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      t_q <= '0; blk_q <= '0; wseq_q <= '0;
    end else begin
      t_q <= t; blk_q <= blk; wseq_q <= wseq;
    end
  end

  function automatic logic signed [2*B:0] cmul_re(input logic signed [B-1:0] ar, ai, br, bi);
    return (2*B+1)'(ar * br + ai * bi);      // re(a * conj(b))
  endfunction
  function automatic logic signed [2*B:0] cmul_im(input logic signed [B-1:0] ar, ai, br, bi);
    return (2*B+1)'(ai * br - ar * bi);      // im(a * conj(b))
  endfunction

  // stage 1: products
  logic signed [2*B:0] pr [S][4], pi [S][4];
  logic                p_first, p_last;
  logic [AW-1:0]       p_blk;
  logic [1:0]          p_wseq;
  always_ff @(posedge clk) begin
    for (int s = 0; s < S; s++) begin
      corr_pkg::dual_pol4_t x, y;
      if (s == 0 || int'(blk) >= s) begin
        x = d[s];          // antenna blk-s  (i)
        y = d[0];          // antenna blk    (j)
      end else begin
        x = d[N_ANT];      // antenna blk, previous window        (i)
        y = d[s];          // antenna blk+N_ANT-s, previous window (j)
      end
      pr[s][0] <= cmul_re(x.xre, x.xim, y.xre, y.xim);
      pi[s][0] <= cmul_im(x.xre, x.xim, y.xre, y.xim);
      pr[s][1] <= cmul_re(x.yre, x.yim, y.yre, y.yim);
      pi[s][1] <= cmul_im(x.yre, x.yim, y.yre, y.yim);
      pr[s][2] <= cmul_re(x.xre, x.xim, y.yre, y.yim);
      pi[s][2] <= cmul_im(x.xre, x.xim, y.yre, y.yim);
      pr[s][3] <= cmul_re(x.yre, x.yim, y.xre, y.xim);
      pi[s][3] <= cmul_im(x.yre, x.yim, y.xre, y.xim);
    end
    p_first <= (t == '0);
    p_last  <= (t == TW'(T_ACC - 1));
    p_blk   <= blk;
    p_wseq  <= wseq;
  end

  // stage 2: accumulators
  logic signed [ACC_W-1:0] acc_re [S][4], acc_im [S][4];
  logic                    a_done;
  logic [AW-1:0]           a_blk;
  logic [1:0]              a_wseq;
  always_ff @(posedge clk) begin
    for (int s = 0; s < S; s++)
      for (int p = 0; p < 4; p++) begin
        acc_re[s][p] <= (p_first ? '0 : acc_re[s][p]) + ACC_W'(pr[s][p]);
        acc_im[s][p] <= (p_first ? '0 : acc_im[s][p]) + ACC_W'(pi[s][p]);
      end
    a_done <= p_last;
    a_blk  <= p_blk;
    a_wseq <= p_wseq;
  end

  // output shift register
  typedef struct packed {
    logic                    v;
    logic [7:0]              i, j, blk, stage;
    logic                    prev, red;
    logic [1:0]              wsel;
    logic [4*2*ACC_W-1:0]    vis;
  } res_t;
  res_t sr [S];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < S; s++) sr[s].v <= 1'b0;
    end else if (a_done) begin
      for (int s = 0; s < S; s++) begin
        logic pv;
        pv = (s != 0) && (int'(a_blk) < s);
        sr[s].v     <= 1'b1;
        sr[s].stage <= 8'(s);
        sr[s].blk   <= 8'(a_blk);
        sr[s].prev  <= pv;
        sr[s].i     <= pv ? 8'(a_blk) : 8'(int'(a_blk) - s);
        sr[s].j     <= pv ? 8'(int'(a_blk) + N_ANT - s) : 8'(a_blk);
        sr[s].red   <= pv && (N_ANT % 2 == 0) && (s == N_ANT / 2);
        sr[s].wsel  <= pv ? a_wseq - 1'b1 : a_wseq;
        for (int p = 0; p < 4; p++)
          sr[s].vis[2*ACC_W*p +: 2*ACC_W] <= {acc_re[s][p], acc_im[s][p]};
      end
    end else begin
      for (int s = 0; s < S - 1; s++) sr[s] <= sr[s+1];
      sr[S-1].v <= 1'b0;
    end
  end

  always_comb begin
    out_valid     = sr[0].v;
    out_i         = sr[0].i;
    out_j         = sr[0].j;
    out_blk       = sr[0].blk;
    out_stage     = sr[0].stage;
    out_prev      = sr[0].prev;
    out_redundant = sr[0].red;
    out_wsel      = sr[0].wsel;
    for (int p = 0; p < 4; p++) begin
      out_re[p] = $signed(sr[0].vis[2*ACC_W*p + ACC_W +: ACC_W]);
      out_im[p] = $signed(sr[0].vis[2*ACC_W*p +: ACC_W]);
    end
  end
endmodule
