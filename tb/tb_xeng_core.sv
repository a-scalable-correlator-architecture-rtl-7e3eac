// tb_xeng_core: feeds windows of random 4-bit dual-polarization samples into
// a 5-antenna X engine (T_ACC = 8, so 3 stages) and checks every result it
// produces against sums x_i * conj(x_j) over the block computed here, for
// all four polarization products. Also checks that every baseline (i <= j)
// of every complete window appears, and the 3-clock delay from a block's
// last sample to its first result.
module tb_xeng_core;
  import corr_pkg::*;
  localparam int N = 5, T = 8, S = N / 2 + 1, NWIN = 6;
  localparam int ACC_W = 2 * 4 + 2 + $clog2(T);
  logic clk = 0, rst = 1, in_sync = 0;
  dual_pol4_t in_sample;
  logic out_valid, out_prev, out_redundant;
  logic [7:0] out_i, out_j, out_blk, out_stage;
  logic [1:0] out_wsel;
  logic signed [ACC_W-1:0] out_re [4], out_im [4];
  int checks = 0, failures = 0;
  dual_pol4_t data [NWIN][N][T];
  int seen [NWIN][N][N];
  int win_of_seq [4];
  int cyc = 0, last_sample_cyc = -100, first_out_cyc = -1;

  xeng_core #(.N_ANT(N), .T_ACC(T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sre(input logic signed [3:0] ar, ai, br, bi);
    return int'(ar) * int'(br) + int'(ai) * int'(bi);
  endfunction
  function automatic int sim(input logic signed [3:0] ar, ai, br, bi);
    return int'(ai) * int'(br) - int'(ar) * int'(bi);
  endfunction

  initial begin
    for (int w = 0; w < NWIN; w++)
      for (int a = 0; a < N; a++)
        for (int t = 0; t < T; t++) begin
          data[w][a][t].xre = 4'(int'($urandom_range(14)) - 7);
          data[w][a][t].xim = 4'(int'($urandom_range(14)) - 7);
          data[w][a][t].yre = 4'(int'($urandom_range(14)) - 7);
          data[w][a][t].yim = 4'(int'($urandom_range(14)) - 7);
        end
    in_sample = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int w = 0; w < NWIN; w++) begin
      win_of_seq[(w + 1) % 4] = w;     // the engine's window count starts at 0, first sync -> 1
      for (int a = 0; a < N; a++)
        for (int t = 0; t < T; t++) begin
          in_sync   <= (a == 0 && t == 0);
          in_sample <= data[w][a][t];
          if (w == 0 && a == 0 && t == T - 1) last_sample_cyc = cyc + 1;
          @(posedge clk);
        end
    end
    in_sync <= 0;
    repeat (3 * T) @(posedge clk);
    // completeness: windows 0 .. NWIN-2 are complete (their prev-window
    // results come during the next window)
    for (int w = 0; w < NWIN - 1; w++)
      for (int i = 0; i < N; i++)
        for (int j = i; j < N; j++) begin
          checks++;
          if (seen[w][i][j] == 0) begin
            failures++; $display("window %0d baseline %0d-%0d never produced", w, i, j);
          end
        end
    // the last sample is driven after edge k and taken in at edge k+1; the
    // first result is on the outputs after edge k+3 and seen here at edge k+4
    checks++;
    if (first_out_cyc - last_sample_cyc != 4) begin
      failures++; $display("first result %0d clocks after last sample, expected 4", first_out_cyc - last_sample_cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (!rst && out_valid) begin
      int w;
      int er [4], ei [4];
      if (first_out_cyc < 0) first_out_cyc = cyc;
      w = win_of_seq[out_wsel];
      if (w >= 0 && w < NWIN && int'(out_i) < N && int'(out_j) < N) begin
        for (int p = 0; p < 4; p++) begin er[p] = 0; ei[p] = 0; end
        for (int t = 0; t < T; t++) begin
          dual_pol4_t x, y;
          x = data[w][out_i][t];
          y = data[w][out_j][t];
          er[0] += sre(x.xre, x.xim, y.xre, y.xim); ei[0] += sim(x.xre, x.xim, y.xre, y.xim);
          er[1] += sre(x.yre, x.yim, y.yre, y.yim); ei[1] += sim(x.yre, x.yim, y.yre, y.yim);
          er[2] += sre(x.xre, x.xim, y.yre, y.yim); ei[2] += sim(x.xre, x.xim, y.yre, y.yim);
          er[3] += sre(x.yre, x.yim, y.xre, y.xim); ei[3] += sim(x.yre, x.yim, y.xre, y.xim);
        end
        checks++;
        if (out_i > out_j) begin failures++; $display("i > j"); end
        for (int p = 0; p < 4; p++) begin
          checks++;
          if (int'(out_re[p]) != er[p] || int'(out_im[p]) != ei[p]) begin
            failures++;
            $display("w%0d V%0d%0d pol%0d = %0d,%0d expected %0d,%0d", w, out_i, out_j, p,
                     out_re[p], out_im[p], er[p], ei[p]);
          end
        end
        seen[w][out_i][out_j]++;
      end
    end
  end

  initial
    for (int k = 0; k < 4; k++) win_of_seq[k] = -1;
endmodule
