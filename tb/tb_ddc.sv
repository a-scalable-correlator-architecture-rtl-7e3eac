// tb_ddc: checks the down-converter against a model computed here. Random
// ADC samples and LO values are driven (the LO is an input here, so any
// values serve). The model forms the mixed sequence s[m] = adc*cos - j*adc*sin
// for sample m = 4*clock + lane, and the 16-tap low-pass recomputed in the
// testbench (sinc with cutoff 1/8 of the input rate times a Hamming window,
// normalized to unity DC gain and scaled by 2^15); every clock the output
// must be sum_k h[k] * s[newest - k] >>> 13, saturated to 18 bits, 2 clocks
// after the input clock holding the newest sample. out_sync follows in_sync.
module tb_ddc;
  localparam int PAR = 4, NTAP = 16, NCYC = 400;
  logic clk = 1'b0, in_sync = 1'b0;
  logic signed [7:0] adc [PAR], lo_cos [PAR], lo_sin [PAR];
  logic signed [17:0] out_re, out_im;
  logic out_sync;
  int checks = 0, failures = 0;
  int sre [NCYC * PAR], sim [NCYC * PAR];
  longint hq [NTAP];
  always #5 clk = ~clk;

  ddc #(.PAR(PAR)) dut (.clk, .in_sync, .adc, .lo_cos, .lo_sin, .out_re, .out_im, .out_sync);

  function automatic real proto(input int k);
    real x, s;
    x = (real'(k) - 7.5) / 4.0;
    s = (x == 0.0) ? 1.0 : $sin(3.14159265358979323846 * x) / (3.14159265358979323846 * x);
    return s * (0.54 - 0.46 * $cos(2.0 * 3.14159265358979323846 * real'(k) / 15.0));
  endfunction

  function automatic int sat18(input longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return int'(v);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    real sum;
    sum = 0.0;
    for (int k = 0; k < NTAP; k++) sum += proto(k);
    for (int k = 0; k < NTAP; k++) begin
      real w;
      w = proto(k) / sum * 32768.0;
      hq[k] = longint'((w >= 0.0) ? $floor(w + 0.5) : -$floor(-w + 0.5));
    end
    for (int i = 0; i < PAR; i++) begin adc[i] = '0; lo_cos[i] = '0; lo_sin[i] = '0; end
    repeat (8) @(negedge clk);          // flush the history with zeros
    fork
      for (int c = 0; c < NCYC; c++) begin
        in_sync = (c == 0);
        for (int i = 0; i < PAR; i++) begin
          int a, co, si;
          a  = int'($urandom_range(255)) - 128;
          co = int'($urandom_range(254)) - 127;
          si = int'($urandom_range(254)) - 127;
          adc[i] = 8'(a); lo_cos[i] = 8'(co); lo_sin[i] = 8'(si);
          sre[c * PAR + i] = a * co;
          sim[c * PAR + i] = -(a * si);
        end
        @(negedge clk);
      end
      begin
        repeat (2) @(negedge clk);
        for (int c = 0; c < NCYC; c++) begin
          longint ar, ai;
          ar = 0; ai = 0;
          for (int k = 0; k < NTAP; k++) begin
            int m;
            m = c * PAR + PAR - 1 - k;
            if (m >= 0) begin ar += hq[k] * longint'(sre[m]); ai += hq[k] * longint'(sim[m]); end
          end
          checks++;
          if (int'(out_re) != sat18(ar >>> 13) || int'(out_im) != sat18(ai >>> 13) || out_sync != (c == 0)) begin
            failures++;
            if (failures < 10) $display("clock %0d: %0d,%0d sync %0d expected %0d,%0d", c, out_re, out_im, out_sync,
                                        sat18(ar >>> 13), sat18(ai >>> 13));
          end
          @(negedge clk);
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
