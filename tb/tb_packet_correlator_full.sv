// tb_packet_correlator_full: end-to-end test of the packetized correlator. The
// ADC inputs get noise with a component common to all antennas (so that the
// cross products are non-zero). A behavioural model of the 10GbE switch
// connects the boards' transmit ports to the receive ports: each packet is
// buffered whole and forwarded to the port named with it, and port N_NODE is
// the data-acquisition (DA) port. The requantized 4-bit spectra of every
// F processor are recorded. Every accumulated-output packet that reaches
// the DA port is checked word by word against visibilities recomputed from
// those spectra, with the count of accumulated windows.
// Faults injected, each counted and required to have happened:
//  * before any data, a packet with a far-future MCNT makes one receive
//    buffer lock onto it; the buffer must time out and relock;
//  * one switched data packet is dropped; the reference zeroes those samples
//    (missing data is replaced by zeros);
//  * a stale packet (MCNT already read out) must be rejected;
//  * a packet with an antenna index out of range must be dropped by the
//    packet switch.
// Also required: loopback packets were merged, every X engine finished
// integrations, and no buffer overran. The first integration of each engine
// is not compared, because its first windows may be partial while the
// receive buffers lock. FULL = 1 runs the top with all parameters at their
// defaults (16 antennas, 2048 channels); FULL = 0 uses a small configuration
// (4 antennas, 16 channels).

module tb_packet_correlator_full;
  import corr_pkg::*;
  localparam bit FULL      = 1'b1;
  localparam int N_ANT     = FULL ? 16 : 4;
  localparam int ANT_PER_F = 2;
  localparam int XPN       = 2;
  localparam int PAR       = 4;
  localparam int NCHAN     = FULL ? 2048 : 16;
  localparam int TAPS      = FULL ? 8 : 2;
  localparam int T_ACC     = FULL ? 128 : 16;
  localparam int N_WIN     = 8;
  localparam int TIMEOUT   = FULL ? 16 * 16 * 128 : N_ANT * N_ANT * T_ACC;
  localparam int N_NODE    = N_ANT / ANT_PER_F;
  localparam int NXT       = N_NODE * XPN;
  localparam int CH_LOCAL  = NCHAN / NXT;
  localparam int S         = N_ANT / 2 + 1;
  localparam int NDW       = 2 + 4 * S;
  localparam int ACC_LEN   = FULL ? 2 : 8;
  localparam int NEED      = FULL ? 1 : 2;       // compared integrations per engine
  localparam int MAXBLK    = FULL ? 6 : 48;
  localparam longint WATCHDOG = FULL ? 64'd3_000_000 : 64'd200_000;
  localparam int CW        = $clog2(NCHAN);
  localparam int EQ_GAIN   = 8 << 12;            // 8.0 with 12 fractional bits

  logic clk = 1'b0, rst = 1'b1;
  always #2 clk = ~clk;

  logic signed [7:0]   adc [N_ANT][2][PAR];
  logic                pps = 1'b0, arm = 1'b0;
  logic [31:0]         lo_inc = 32'h2000_0000;
  logic [CW-1:0]       fft_shift = CW'({(CW + 1) / 2{2'b01}});  // shift on every other stage
  logic                eq_we = 1'b0;
  logic [7:0]          eq_ant = '0;
  logic                eq_pol = 1'b0;
  logic [CW-1:0]       eq_addr = '0;
  logic [17:0]         eq_data = '0;
  logic [15:0]         acc_len = 16'(ACC_LEN);
  pkt_t                eth_tx [N_NODE];
  logic [7:0]          eth_tx_dest [N_NODE];
  pkt_t                eth_rx [N_NODE];
  logic                fft_ovf [N_NODE];
  logic [15:0]         sync_count [N_NODE];
  logic [31:0]         st_acc [N_NODE][XPN];
  logic [31:0]         st_rej [N_NODE][XPN];
  logic [15:0]         st_to [N_NODE][XPN];
  logic [31:0]         st_vw [N_NODE][XPN];
  logic [15:0]         st_int [N_NODE][XPN];
  logic [31:0]         st_loop [N_NODE];
  logic [15:0]         st_sw [N_NODE];
  logic [15:0]         st_ovr [N_NODE];

  begin : g_dut
    packet_correlator dut (
      .clk, .rst, .adc, .pps, .arm, .lo_inc, .fft_shift, .eq_we, .eq_ant, .eq_pol,
      .eq_addr, .eq_data, .acc_len, .eth_tx, .eth_tx_dest, .eth_rx, .fft_ovf, .sync_count,
      .stat_accepted(st_acc), .stat_rejected(st_rej), .stat_timeouts(st_to),
      .stat_valid_windows(st_vw), .stat_integrations(st_int), .stat_loop_released(st_loop),
      .stat_switch_drops(st_sw), .stat_overruns(st_ovr));
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at cycle %0d: %s", cyc, msg);
    end
  endtask

  // ---------------- ADC stimulus: common + independent noise ----------------
  always @(posedge clk) begin
    for (int l = 0; l < PAR; l++) begin
      int c;
      c = int'($urandom_range(80)) - 40;
      for (int a = 0; a < N_ANT; a++)
        for (int p = 0; p < 2; p++)
          adc[a][p][l] <= 8'(c + int'($urandom_range(40)) - 20);
    end
  end
  initial
    for (int a = 0; a < N_ANT; a++)
      for (int p = 0; p < 2; p++)
        for (int l = 0; l < PAR; l++) adc[a][p][l] = '0;

  // ---------------- spectrum recording ----------------
  dual_pol4_t rec [][];
  logic       spec_seen [N_NODE];
  longint     spec_cnt [N_NODE];
  longint     nonzero = 0, nsamp = 0;
  initial begin
    rec = new[MAXBLK];
    for (int b = 0; b < MAXBLK; b++) begin
      rec[b] = new[N_ANT * T_ACC * NCHAN];
      for (int i = 0; i < N_ANT * T_ACC * NCHAN; i++) rec[b][i] = '0;
    end
    for (int n = 0; n < N_NODE; n++) begin
      spec_seen[n] = 1'b0;
      spec_cnt[n]  = 0;
    end
  end

  for (genvar n = 0; n < N_NODE; n++) begin : g_rec
    always @(negedge clk) begin
      if (g_dut.dut.g_node[n].spec_sync) begin
        spec_seen[n] = 1'b1;
        spec_cnt[n]  = 0;
      end
      if (spec_seen[n]) begin
        longint s, blk;
        int t, k;
        s   = spec_cnt[n] / NCHAN;
        k   = int'(spec_cnt[n] % NCHAN);
        blk = s / T_ACC;
        t   = int'(s % T_ACC);
        if (blk < MAXBLK)
          for (int a = 0; a < ANT_PER_F; a++) begin
            dual_pol4_t v;
            v = g_dut.dut.g_node[n].spec[a];
            rec[blk][((n * ANT_PER_F + a) * T_ACC + t) * NCHAN + k] = v;
            nsamp++;
            if (v.xre != 0) nonzero++;
          end
        spec_cnt[n]++;
      end
    end
  end

  // ---------------- switch model ----------------
  logic [63:0] cur [N_NODE][$];
  logic [7:0]  cdest [N_NODE];
  logic [65:0] oq [N_NODE][$];
  int          data_pkts = 0;
  int          drop_at;
  bit          dropped = 1'b0;
  int          drop_ant = -1;
  longint      drop_mcnt = -1;
  int          da_pkts = 0;
  int          checked_pkts [NXT];
  bit          have_first [NXT];
  longint      first_start [NXT];
  initial begin
    drop_at = FULL ? 5000 : 300;
    for (int g = 0; g < NXT; g++) begin
      checked_pkts[g] = 0;
      have_first[g]   = 1'b0;
      first_start[g]  = 0;
    end
    for (int n = 0; n < N_NODE; n++) begin
      cdest[n]  = '0;
      eth_rx[n] = PKT_IDLE;
    end
  end

  function automatic int smp(input int a, input int b, input int t, input int k, input int f);
    dual_pol4_t v;
    if (dropped && a == drop_ant && longint'(b) * NCHAN + k == drop_mcnt) return 0;
    v = rec[b][(a * T_ACC + t) * NCHAN + k];
    case (f)
      0: return int'($signed(v.xre));
      1: return int'($signed(v.xim));
      2: return int'($signed(v.yre));
      default: return int'($signed(v.yim));
    endcase
  endfunction

  task automatic check_da(input logic [63:0] w [$]);
    int g, cnt, c, blk, al, k;
    longint st;
    da_pkts++;
    if (w.size() != NDW || w[0][63:48] != ACC_PKT_ID) begin
      check(1'b0, $sformatf("DA packet malformed, %0d words", w.size()));
      return;
    end
    g   = int'(w[0][47:40]);
    cnt = int'(w[0][39:24]);
    c   = int'(w[0][23:8]);
    blk = int'(w[0][7:0]);
    al  = int'(w[1][63:48]);
    st  = longint'(w[1][47:0]);
    if (g >= NXT || c >= CH_LOCAL || blk >= N_ANT) begin
      check(1'b0, "DA header field out of range");
      return;
    end
    if (!have_first[g]) begin
      have_first[g]  = 1'b1;
      first_start[g] = st;
    end
    if (st == first_start[g]) return;       // first integration: not compared
    if (st + al > MAXBLK) begin
      check(1'b0, "integration beyond recorded spectra");
      return;
    end
    check(al == ACC_LEN, "acc_len field");
    check(cnt == ACC_LEN, $sformatf("eng %0d chan %0d count %0d", g, c, cnt));
    k = c * NXT + g;
    for (int s = 0; s < S; s++) begin
      int i, j;
      longint er [4], ei [4];
      if (blk >= s) begin i = blk - s; j = blk; end
      else begin i = blk; j = blk + N_ANT - s; end
      for (int p = 0; p < 4; p++) begin er[p] = 0; ei[p] = 0; end
      for (int b = int'(st); b < int'(st) + al; b++)
        for (int t = 0; t < T_ACC; t++) begin
          int xr, xi, yr, yi, ar, ai, br, bi;
          xr = smp(i, b, t, k, 0); xi = smp(i, b, t, k, 1);
          yr = smp(i, b, t, k, 2); yi = smp(i, b, t, k, 3);
          ar = smp(j, b, t, k, 0); ai = smp(j, b, t, k, 1);
          br = smp(j, b, t, k, 2); bi = smp(j, b, t, k, 3);
          // x * conj(y): XX, YY, XY, YX
          er[0] += xr * ar + xi * ai;  ei[0] += xi * ar - xr * ai;
          er[1] += yr * br + yi * bi;  ei[1] += yi * br - yr * bi;
          er[2] += xr * br + xi * bi;  ei[2] += xi * br - xr * bi;
          er[3] += yr * ar + yi * ai;  ei[3] += yi * ar - yr * ai;
        end
      for (int p = 0; p < 4; p++) begin
        logic [63:0] d;
        longint gr, gi;
        d  = w[2 + 4 * s + p];
        gr = longint'($signed(d[63:32]));
        gi = longint'($signed(d[31:0]));
        check(gr == er[p] && gi == ei[p],
              $sformatf("eng %0d chan %0d blk %0d stage %0d pol %0d: %0d,%0d expected %0d,%0d",
                        g, c, blk, s, p, gr, gi, er[p], ei[p]));
      end
    end
    checked_pkts[g]++;
  endtask

  always @(posedge clk) begin
    for (int n = 0; n < N_NODE; n++) begin
      if (eth_tx[n].valid) begin
        if (eth_tx[n].sop) begin
          cur[n].delete();
          cdest[n] = eth_tx_dest[n];
        end
        cur[n].push_back(eth_tx[n].data);
        if (eth_tx[n].eop) begin
          if (int'(cdest[n]) == N_NODE) begin
            check_da(cur[n]);
          end else if (int'(cdest[n]) > N_NODE) begin
            check(1'b0, "packet to unknown port");
          end else begin
            data_pkts++;
            if (!dropped && data_pkts >= drop_at && int'(cdest[n]) == 1) begin
              dropped   = 1'b1;
              drop_ant  = int'(cur[n][0][63:48]);
              drop_mcnt = longint'(cur[n][0][47:0]);
            end else begin
              for (int i = 0; i < cur[n].size(); i++)
                oq[cdest[n]].push_back({i == 0, i == cur[n].size() - 1, cur[n][i]});
            end
          end
        end
      end
    end
    for (int p = 0; p < N_NODE; p++) begin
      if (oq[p].size() != 0) begin
        logic [65:0] w;
        w = oq[p].pop_front();
        eth_rx[p] <= '{valid: 1'b1, sop: w[65], eop: w[64], data: w[63:0]};
      end else begin
        eth_rx[p] <= PKT_IDLE;
      end
    end
  end

  task automatic inject(input int port, input int ant, input longint mcnt);
    oq[port].push_back({1'b1, 1'b0, 16'(ant), 48'(mcnt)});
    for (int i = 0; i < T_ACC / 4; i++)
      oq[port].push_back({1'b0, i == T_ACC / 4 - 1, 32'($urandom), 32'($urandom)});
  endtask

  function automatic bit all_done();
    for (int g = 0; g < NXT; g++)
      if (checked_pkts[g] < NEED * CH_LOCAL * N_ANT) return 1'b0;
    return 1'b1;
  endfunction

  // watchdog for the phases that wait on the design
  initial begin
    wait (cyc >= WATCHDOG + 1000);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  // ---------------- sequence ----------------
  initial begin
    longint tot_to, tot_rej, tot_loop, tot_sw, tot_ovr;
    bit ints_ok;
    repeat (10) @(negedge clk);
    rst = 1'b0;
    repeat (20) @(negedge clk);
    // equalizer gain EQ_GAIN on every input and channel
    for (int a = 0; a < N_ANT; a++)
      for (int p = 0; p < 2; p++)
        for (int k = 0; k < NCHAN; k++) begin
          eq_we   = 1'b1;
          eq_ant  = 8'(a);
          eq_pol  = p[0];
          eq_addr = CW'(k);
          eq_data = 18'(EQ_GAIN);
          @(negedge clk);
        end
    eq_we = 1'b0;
    // far-future MCNT to engine 0 (node 0) before any data: lock, then time-out
    inject(0, 1, longint'(1) << 30);
    arm = 1'b1;
    @(negedge clk);
    arm = 1'b0;
    repeat (10) @(negedge clk);
    pps = 1'b1;
    repeat (5) @(negedge clk);
    pps = 1'b0;
    // wait until data flows, then a stale packet and an out-of-range antenna
    wait (data_pkts >= drop_at + 50);
    @(negedge clk);
    inject(1 % N_NODE, 0, longint'(2 % NXT));
    inject(0, N_ANT, 0);
    while (!all_done() && cyc < WATCHDOG) @(negedge clk);
    check(cyc < WATCHDOG, "watchdog: not all integrations arrived");

    tot_to = 0; tot_rej = 0; tot_loop = 0; tot_sw = 0; tot_ovr = 0;
    ints_ok = 1'b1;
    for (int n = 0; n < N_NODE; n++) begin
      tot_loop += st_loop[n];
      tot_sw   += st_sw[n];
      tot_ovr  += st_ovr[n];
      for (int e = 0; e < XPN; e++) begin
        tot_to  += st_to[n][e];
        tot_rej += st_rej[n][e];
        if (st_int[n][e] < 16'(NEED + 1)) ints_ok = 1'b0;
      end
      check(sync_count[n] == 16'd1, "one sync event per F processor");
    end
    $display("spectra: %0d of %0d samples non-zero; %0d data packets, %0d DA packets",
             nonzero, nsamp, data_pkts, da_pkts);
    $display("timeouts %0d rejected %0d loopback %0d switch-drops %0d overruns %0d dropped %0d",
             tot_to, tot_rej, tot_loop, tot_sw, tot_ovr, dropped);
    check(nonzero * 4 > nsamp, "spectra mostly zero: stimulus too weak");
    check(tot_to >= 1, "mechanism never happened: receive-buffer time-out");
    check(tot_rej >= 1, "mechanism never happened: stale packet rejected");
    check(tot_loop >= 1, "mechanism never happened: loopback merge");
    check(tot_sw >= 1, "mechanism never happened: packet-switch drop");
    check(dropped, "mechanism never happened: lost packet");
    check(ints_ok, "mechanism never happened: integration readout on every engine");
    check(tot_ovr == 0, "no overruns");
    for (int g = 0; g < NXT; g++)
      check(checked_pkts[g] >= NEED * CH_LOCAL * N_ANT, $sformatf("engine %0d compared", g));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
