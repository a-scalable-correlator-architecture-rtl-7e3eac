// tb_rx_buffer: sends packets for a 4-antenna, T_ACC = 8 engine into the
// receive buffer and checks every window it reads out against the payloads
// sent: antennas arrive in scrambled order and windows overlap, one packet is
// lost (its antenna must read as zeros), one packet carries an MCNT far out
// of range (must be rejected and never appear), and after a long silence the
// buffer must time out and lock onto a new, distant MCNT.
module tb_rx_buffer;
  import corr_pkg::*;
  localparam int N = 4, T = 8, NX = 2, NWORD = T / 4, TIMEOUT = 400;
  logic clk = 0, rst = 1;
  pkt_t in;
  dual_pol4_t out_sample;
  logic out_sync, out_valid;
  logic [MCNT_W-1:0] out_win;
  logic [31:0] accepted, rejected, windows_read;
  logic [15:0] timeouts;
  int checks = 0, failures = 0;
  logic [63:0] sent [int][N][NWORD];
  bit          got  [int][N];
  int windows_checked = 0, zero_ant_checked = 0;

  rx_buffer #(.N_ANT(N), .T_ACC(T), .N_WIN(8), .N_XENG_TOT(NX), .TIMEOUT(TIMEOUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input int lw, input int ant, input bit record);
    in <= '{valid: 1'b1, sop: 1'b1, eop: 1'b0, data: {16'(ant), 48'(lw * NX)}};
    @(posedge clk);
    for (int w = 0; w < NWORD; w++) begin
      logic [63:0] d;
      d = {$urandom, $urandom};
      if (record) begin sent[lw][ant][w] = d; got[lw][ant] = 1; end
      in <= '{valid: 1'b1, sop: 1'b0, eop: (w == NWORD - 1), data: d};
      @(posedge clk);
    end
  endtask

  task automatic send_window(input int lw);
    int order [N];
    for (int a = 0; a < N; a++) order[a] = (a + lw) % N;   // scrambled antenna order
    for (int k = 0; k < N; k++)
      if (!(lw == 9 && order[k] == 2)) send(lw, order[k], 1);   // (9,2) is lost; its slot held window 1
    in <= PKT_IDLE;
    repeat (N * T - N * (NWORD + 1)) @(posedge clk);
  endtask

  initial begin
    in = PKT_IDLE;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int lw = 0; lw < 16; lw++) begin
      send_window(lw);
      if (lw == 6) send(lw + 100, 1, 0);      // interfering packet
    end
    repeat (TIMEOUT + 300) @(posedge clk);     // silence: time-out
    for (int lw = 1000; lw < 1010; lw++) send_window(lw);
    repeat (20 * N * T) @(posedge clk);
    checks++;
    if (rejected == 0) begin failures++; $display("interfering packet not rejected"); end
    checks++;
    if (timeouts == 0) begin failures++; $display("no time-out"); end
    checks++;
    if (windows_checked < 12) begin failures++; $display("only %0d windows read out", windows_checked); end
    checks++;
    if (zero_ant_checked == 0) begin failures++; $display("lost packet never read as zeros"); end
    $display("windows checked %0d, rejected %0d, timeouts %0d", windows_checked, rejected, timeouts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  int pos = -1;
  int cur;
  bit cur_valid;
  always @(posedge clk) begin
    if (!rst) begin
      if (out_sync) begin
        pos = 0; cur = int'(out_win); cur_valid = out_valid;
        if (out_valid) begin
          windows_checked++;
          checks++;
          if (!sent.exists(cur)) begin failures++; $display("window %0d read out but never sent", cur); end
        end
      end
      if (pos >= 0 && pos < N * T && cur_valid && sent.exists(cur)) begin
        int a, t;
        logic [15:0] exp;
        a = pos / T; t = pos % T;
        exp = got[cur][a] ? sent[cur][a][t / 4][16 * (t % 4) +: 16] : 16'h0;
        if (!got[cur][a] && t == 0) zero_ant_checked++;
        checks++;
        if (out_sample != exp) begin
          failures++; $display("window %0d ant %0d t %0d: %h expected %h", cur, a, t, out_sample, exp);
        end
      end
      if (pos >= 0) pos++;
    end
  end
endmodule
