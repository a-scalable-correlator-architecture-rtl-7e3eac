// tb_pfb_fir: checks the polyphase FIR against a model computed here. The
// window h[i] = sinc((i - TAPS*NCHAN/2)/NCHAN) * (0.54 - 0.46 cos(2 pi i /
// (TAPS*NCHAN-1))), scaled to 18-bit with peak (2^17-1), is recomputed in
// the testbench; for every output position n of frame f the expected value
// is sum_k h[(TAPS-1-k)*NCHAN + n] * x_f-k[n] >>> 17, saturated to 18 bits,
// for both polarizations and real and imaginary parts, with random inputs
// (frames before the first are zero). The output must appear 2 clocks after
// its input, with out_sync following in_sync.
module tb_pfb_fir;
  localparam int NCHAN = 16, TAPS = 4, DW = 18, CW = 18, NF = 12;
  logic clk = 1'b0, in_sync = 1'b0;
  logic signed [DW-1:0] in_re [2], in_im [2], out_re [2], out_im [2];
  logic out_sync;
  int checks = 0, failures = 0;
  int xr [2][NF][NCHAN], xi [2][NF][NCHAN];
  always #5 clk = ~clk;

  pfb_fir #(.NCHAN(NCHAN), .TAPS(TAPS), .DW(DW), .CW(CW)) dut (.clk, .in_sync, .in_re, .in_im, .out_re, .out_im, .out_sync);

  function automatic longint h(input int i);
    real x, s, w;
    x = (real'(i) - real'(TAPS * NCHAN) / 2.0) / real'(NCHAN);
    s = (x == 0.0) ? 1.0 : $sin(3.14159265358979323846 * x) / (3.14159265358979323846 * x);
    w = s * (0.54 - 0.46 * $cos(2.0 * 3.14159265358979323846 * real'(i) / real'(TAPS * NCHAN - 1)));
    w = w * 131071.0;
    return longint'((w >= 0.0) ? $floor(w + 0.5) : -$floor(-w + 0.5));
  endfunction

  function automatic int expect_v(input int p, input int f, input int n, input bit im);
    longint acc;
    acc = 0;
    for (int k = 0; k < TAPS; k++)
      if (f - k >= 0) acc += h((TAPS - 1 - k) * NCHAN + n) * longint'(im ? xi[p][f-k][n] : xr[p][f-k][n]);
    acc = acc >>> 17;
    if (acc > 131071) acc = 131071;
    if (acc < -131072) acc = -131072;
    return int'(acc);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    for (int p = 0; p < 2; p++) begin in_re[p] = '0; in_im[p] = '0; end
    for (int p = 0; p < 2; p++)
      for (int f = 0; f < NF; f++)
        for (int n = 0; n < NCHAN; n++) begin
          xr[p][f][n] = int'($urandom_range(131071)) - 65536;
          xi[p][f][n] = int'($urandom_range(131071)) - 65536;
        end
    repeat (3) @(negedge clk);
    fork
      begin
        for (int f = 0; f < NF; f++)
          for (int n = 0; n < NCHAN; n++) begin
            in_sync = (f == 0 && n == 0);
            for (int p = 0; p < 2; p++) begin in_re[p] = DW'(xr[p][f][n]); in_im[p] = DW'(xi[p][f][n]); end
            @(negedge clk);
          end
        in_sync = 1'b0;
      end
      begin
        repeat (2) @(negedge clk);
        for (int f = 0; f < NF; f++)
          for (int n = 0; n < NCHAN; n++) begin
            for (int p = 0; p < 2; p++) begin
              int er, ei;
              er = expect_v(p, f, n, 1'b0);
              ei = expect_v(p, f, n, 1'b1);
              checks++;
              if (int'(out_re[p]) != er || int'(out_im[p]) != ei) begin
                failures++;
                if (failures < 10) $display("f %0d n %0d pol %0d: %0d,%0d expected %0d,%0d", f, n, p, out_re[p], out_im[p], er, ei);
              end
            end
            checks++;
            if (out_sync != (f == 0 && n == 0)) begin failures++; $display("out_sync wrong at f %0d n %0d", f, n); end
            @(negedge clk);
          end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
