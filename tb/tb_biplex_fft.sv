// tb_biplex_fft: drives two random complex streams into a 16-point biplex FFT
// and compares both output spectra of two consecutive frames, channel by
// channel, with a direct DFT computed here in floating point. Also checks
// the latency from in_sync to out_sync, the channel index and one overflow.
module tb_biplex_fft;
  localparam int N = 16, DW = 18, M = 4;
  localparam int LATENCY = (N - 1 + M) + N + 1;
  logic clk = 0, rst = 1, in_sync = 0;
  logic [M-1:0] shift = '0;
  logic signed [DW-1:0] a_re, a_im, b_re, b_im, x_re, x_im, y_re, y_im;
  logic [M-1:0] out_chan;
  logic out_sync, ovf;
  int checks = 0, failures = 0;
  int ar [2][N], ai [2][N], br [2][N], bi [2][N];

  biplex_fft #(.NFFT(N), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void dft(input int xr [N], input int xi [N], input int k, output real re, output real im);
    re = 0.0; im = 0.0;
    for (int n = 0; n < N; n++) begin
      real ang;
      ang = -2.0 * 3.14159265358979 * real'(k * n) / real'(N);
      re += real'(xr[n]) * $cos(ang) - real'(xi[n]) * $sin(ang);
      im += real'(xr[n]) * $sin(ang) + real'(xi[n]) * $cos(ang);
    end
  endfunction

  function automatic real fabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  int t_sync = 0, t_out = 0;
  initial begin
    for (int f = 0; f < 2; f++)
      for (int n = 0; n < N; n++) begin
        ar[f][n] = int'($urandom_range(4000)) - 2000; ai[f][n] = int'($urandom_range(4000)) - 2000;
        br[f][n] = int'($urandom_range(4000)) - 2000; bi[f][n] = int'($urandom_range(4000)) - 2000;
      end
    a_re = 0; a_im = 0; b_re = 0; b_im = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    // frames 0 and 1, then more frames with a large tone for overflow
    for (int f = 0; f < 6; f++)
      for (int n = 0; n < N; n++) begin
        in_sync <= (f == 0 && n == 0);
        a_re <= DW'(f < 2 ? ar[f][n] : 100000); a_im <= DW'(f < 2 ? ai[f][n] : 0);
        b_re <= DW'(f < 2 ? br[f][n] : 0);      b_im <= DW'(f < 2 ? bi[f][n] : 0);
        @(posedge clk);
      end
  end

  int seen_ovf = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (ovf) seen_ovf++;
    if (in_sync) t_sync = cyc;
    if (out_sync && t_sync > 0 && t_out == 0) t_out = cyc;
  end

  initial begin
    real rr, ri;
    @(posedge out_sync);
    @(negedge clk);
    for (int f = 0; f < 2; f++)
      for (int k = 0; k < N; k++) begin
        checks++;
        if (out_chan != M'(k)) begin failures++; $display("chan %0d exp %0d", out_chan, k); end
        dft(ar[f], ai[f], k, rr, ri);
        checks++;
        if (fabs(real'(x_re) - rr) > 12.0 || fabs(real'(x_im) - ri) > 12.0) begin
          failures++; $display("f%0d X[%0d] = %0d,%0d exp %f,%f", f, k, x_re, x_im, rr, ri);
        end
        dft(br[f], bi[f], k, rr, ri);
        checks++;
        if (fabs(real'(y_re) - rr) > 12.0 || fabs(real'(y_im) - ri) > 12.0) begin
          failures++; $display("f%0d Y[%0d] = %0d,%0d exp %f,%f", f, k, y_re, y_im, rr, ri);
        end
        @(negedge clk);
      end
    repeat (4 * N) @(posedge clk);
    checks++;
    if (t_out - t_sync != LATENCY) begin
      failures++; $display("latency %0d expected %0d (%0d %0d)", t_out - t_sync, LATENCY, t_out, t_sync);
    end
    checks++;
    if (seen_ovf == 0) begin failures++; $display("no overflow flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
