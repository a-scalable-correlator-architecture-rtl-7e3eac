// tb_dds_lo: checks the digital LO against a model computed here: for random
// frequency words, sample n after the sync has phase n*freq_inc; the table
// address is the phase rounded to its top 8 bits, and the outputs must equal
// round(127*sin) and round(127*cos) of that address (computed with $sin and
// $cos, not from the block's table). Also checks that the phase restarts on
// sync and that the outputs are registered one clock after the sync edge.
module tb_dds_lo;
  localparam int PAR = 4;
  logic clk = 1'b0, rst = 1'b1, sync = 1'b0;
  logic [31:0] freq_inc = '0;
  logic signed [7:0] cos_o [PAR], sin_o [PAR];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dds_lo #(.PAR(PAR)) dut (.clk, .rst, .sync, .freq_inc, .cos_o, .sin_o);

  function automatic int ref_val(input longint n, input logic [31:0] inc, input bit is_cos);
    logic [31:0] ph;
    int a;
    real x;
    ph = 32'(n * longint'(inc)) + 32'(1 << 23);
    a  = int'(ph[31:24]);
    x  = 2.0 * 3.14159265358979323846 * real'(a) / 256.0;
    return int'(corr_pkg::round_r(127.0 * (is_cos ? $cos(x) : $sin(x))));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int trial = 0; trial < 6; trial++) begin
      freq_inc = (trial == 0) ? 32'h4000_0000 : $urandom;   // trial 0: fs/4
      repeat (5) @(negedge clk);
      sync = 1'b1;
      @(negedge clk);
      sync = 1'b0;
      for (int m = 0; m < 300; m++) begin
        for (int i = 0; i < PAR; i++) begin
          int es, ec;
          es = ref_val(longint'(m) * PAR + i, freq_inc, 1'b0);
          ec = ref_val(longint'(m) * PAR + i, freq_inc, 1'b1);
          checks++;
          if (int'(sin_o[i]) != es || int'(cos_o[i]) != ec) begin
            failures++;
            if (failures < 10)
              $display("inc %h m %0d lane %0d: sin %0d cos %0d expected %0d %0d",
                       freq_inc, m, i, sin_o[i], cos_o[i], es, ec);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
