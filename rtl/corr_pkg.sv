// corr_pkg: types, constants and helper functions shared by the packetized
// FX correlator. The defaults are the sizes of the 16-antenna, 2048-channel,
// full-Stokes deployment: 4-bit complex samples after requantization,
// T_acc = 128 samples per packet, a 2-byte antenna index and a 6-byte master
// counter (MCNT) in every packet header, 64-bit packet words.
// Packet word layout (this design's choice): header word = {ant[15:0], mcnt[47:0]};
// payload word w carries time samples 4w..4w+3, sample 4w+i in bits [16i +: 16].
package corr_pkg;

  localparam int MCNT_W = 48;   // 6 bytes of frequency/time index
  localparam int ANT_W  = 16;   // 2 bytes of antenna index
  localparam int WORD_W = 64;   // 10GbE/XAUI data-path word
  localparam logic [15:0] ACC_PKT_ID = 16'hFFFF;  // antenna field of an output packet

  // One 4-bit complex sample of both polarizations (X = parallel, Y = perpendicular).
  typedef struct packed {
    logic signed [3:0] xre;
    logic signed [3:0] xim;
    logic signed [3:0] yre;
    logic signed [3:0] yim;
  } dual_pol4_t;

  // One word of a packet stream. No backpressure: links are free-running.
  typedef struct packed {
    logic              valid;
    logic              sop;
    logic              eop;
    logic [WORD_W-1:0] data;
  } pkt_t;

  localparam pkt_t PKT_IDLE = '{valid: 1'b0, sop: 1'b0, eop: 1'b0, data: '0};

  function automatic logic [ANT_W-1:0] hdr_ant(input logic [WORD_W-1:0] w);
    return w[63:48];
  endfunction

  function automatic logic [MCNT_W-1:0] hdr_mcnt(input logic [WORD_W-1:0] w);
    return w[47:0];
  endfunction

  // Round a real to the nearest integer (half away from zero).
  function automatic int round_r(input real x);
    return (x >= 0.0) ? int'($floor(x + 0.5)) : -int'($floor(-x + 0.5));
  endfunction

  // Saturate a signed value to a signed width of w bits.
  function automatic longint sat_s(input longint v, input int w);
    longint hi;
    longint lo;
    hi = (longint'(1) <<< (w - 1)) - 1;
    lo = -(longint'(1) <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Sinc, with sinc(0) = 1.
  function automatic real sinc(input real x);
    real px;
    px = 3.14159265358979323846 * x;
    if (x == 0.0) return 1.0;
    return $sin(px) / px;
  endfunction

endpackage
