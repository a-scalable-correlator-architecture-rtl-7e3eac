// tb_sync_gen: checks the arm/1PPS synchronization. A 1PPS edge without a
// prior arm must give no sync; after an arm (held a random number of clocks,
// asynchronous to the 1PPS) exactly one single-clock sync pulse must follow
// the next 1PPS rising edge, one clock after the edge that samples it, and
// the block must disarm. Repeated with random spacings; sync_count is checked.
module tb_sync_gen;
  logic clk = 1'b0, rst = 1'b1, pps = 1'b0, arm = 1'b0;
  logic sync, armed;
  logic [15:0] sync_count;
  int checks = 0, failures = 0, pulses = 0, expected_pulses = 0;
  longint cyc = 0, last_pulse = -1;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (sync) begin pulses++; last_pulse = cyc; end

  sync_gen dut (.clk, .rst, .pps, .arm, .sync, .armed, .sync_count);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  task automatic pps_pulse(output longint edge_cyc);
    @(negedge clk);
    pps = 1'b1;
    @(posedge clk);
    edge_cyc = cyc;          // this edge samples the rising 1PPS
    repeat (int'($urandom_range(20, 3))) @(negedge clk);
    pps = 1'b0;
  endtask

  initial begin
    longint e;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    repeat (10) @(negedge clk);
    pps_pulse(e);                                   // not armed: no sync
    repeat (5) @(negedge clk);
    check(pulses == 0, "sync without arm");
    for (int k = 0; k < 20; k++) begin
      int p0;
      repeat (int'($urandom_range(30, 1))) @(negedge clk);
      arm = 1'b1;
      repeat (int'($urandom_range(10, 1))) @(negedge clk);
      arm = 1'b0;
      repeat (int'($urandom_range(30, 4))) @(negedge clk);
      check(armed, "not armed after arm");
      p0 = pulses;
      pps_pulse(e);
      repeat (3) @(negedge clk);
      check(pulses == p0 + 1, "exactly one sync per armed 1PPS");
      check(last_pulse == e + 1, $sformatf("sync at cycle %0d, 1PPS sampled at %0d", last_pulse, e));
      check(!armed, "still armed after sync");
      pps_pulse(e);                                 // second 1PPS: disarmed
      repeat (3) @(negedge clk);
      check(pulses == p0 + 1, "sync on a 1PPS after disarm");
      expected_pulses++;
    end
    check(sync_count == 16'(expected_pulses), "sync_count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
