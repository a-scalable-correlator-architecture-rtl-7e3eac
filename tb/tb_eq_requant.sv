// tb_eq_requant: checks equalization and 4-bit requantization. Random
// per-channel, per-polarization gains are written through the coefficient
// port, then frames of random 18-bit spectra (including full-scale values,
// to exercise saturation) are fed with in_sync on channel 0. Each output,
// one clock later, must equal round(v * gain / 2^26) limited to -7..+7,
// computed here in floating point (gain has 12 fractional bits, and 4 of
// the 18 input bits are kept). A gain rewritten between frames must take
// effect in the next frame. out_sync must follow in_sync by one clock.
module tb_eq_requant;
  import corr_pkg::*;
  localparam int NCHAN = 16;
  logic clk = 1'b0;
  logic in_sync = 1'b0;
  logic signed [17:0] x_re = '0, x_im = '0, y_re = '0, y_im = '0;
  logic coef_we = 1'b0, coef_pol = 1'b0;
  logic [3:0] coef_addr = '0;
  logic [17:0] coef_data = '0;
  dual_pol4_t out;
  logic out_sync;
  int checks = 0, failures = 0;
  int gain [2][NCHAN];
  always #5 clk = ~clk;

  eq_requant #(.NCHAN(NCHAN)) dut (.clk, .in_sync, .x_re, .x_im, .y_re, .y_im, .coef_we, .coef_pol,
                                   .coef_addr, .coef_data, .out, .out_sync);

  function automatic int eref(input int v, input int g);
    real r;
    r = $floor(real'(v) * real'(g) / 67108864.0 + 0.5);
    if (r > 7.0) r = 7.0;
    if (r < -7.0) r = -7.0;
    return int'(r);
  endfunction

  function automatic int rnd18();
    case ($urandom_range(3))
      0: return int'($urandom_range(262143)) - 131072;      // full range
      1: return int'($urandom_range(32767)) - 16384;        // mid level
      2: return (($urandom_range(1) == 0) ? 131071 : -131072);
      default: return int'($urandom_range(4095)) - 2048;    // small
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  task automatic write_gain(input int p, input int k, input int g);
    coef_we = 1'b1; coef_pol = p[0]; coef_addr = 4'(k); coef_data = 18'(g);
    gain[p][k] = g;
    @(negedge clk);
    coef_we = 1'b0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    for (int p = 0; p < 2; p++)
      for (int k = 0; k < NCHAN; k++) write_gain(p, k, int'($urandom_range(262143)));
    for (int f = 0; f < 20; f++) begin
      if (f == 10) write_gain(1, 3, 4096 * 16);
      for (int k = 0; k < NCHAN; k++) begin
        int v [4];
        for (int i = 0; i < 4; i++) v[i] = rnd18();
        in_sync = (k == 0);
        x_re = 18'(v[0]); x_im = 18'(v[1]); y_re = 18'(v[2]); y_im = 18'(v[3]);
        @(negedge clk);
        checks++;
        if (int'($signed(out.xre)) != eref(v[0], gain[0][k]) || int'($signed(out.xim)) != eref(v[1], gain[0][k]) ||
            int'($signed(out.yre)) != eref(v[2], gain[1][k]) || int'($signed(out.yim)) != eref(v[3], gain[1][k]) ||
            out_sync != (k == 0)) begin
          failures++;
          if (failures < 10)
            $display("frame %0d ch %0d: got %0d %0d %0d %0d sync %0d, expected %0d %0d %0d %0d", f, k,
                     $signed(out.xre), $signed(out.xim), $signed(out.yre), $signed(out.yim), out_sync,
                     eref(v[0], gain[0][k]), eref(v[1], gain[0][k]), eref(v[2], gain[1][k]), eref(v[3], gain[1][k]));
        end
      end
    end
    in_sync = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
