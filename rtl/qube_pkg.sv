// qube_pkg: types, constants and small arithmetic helpers shared by the QuBE
// unit FPGA datapath.
//
// Samples are complex (I/Q) 16-bit two's-complement words, one per clock with
// a valid strobe. After the window stage the capture chain widens to 48-bit
// accumulators. Coefficients (FIR taps, window weights, carrier values) are
// signed Q1.15. The 16-bit sample width follows the 16-bit DACs of the unit;
// the accumulator width, the Q1.15 format and the register map below are this
// design's own choices.
package qube_pkg;

  localparam int SW    = 16;   // sample width (I or Q)
  localparam int ACC_W = 48;   // accumulator width after the Sum stage
  localparam int CNT_W = 64;   // time counter width

  typedef struct packed {
    logic signed [SW-1:0] i;
    logic signed [SW-1:0] q;
  } iq16_t;

  typedef struct packed {
    logic signed [ACC_W-1:0] i;
    logic signed [ACC_W-1:0] q;
  } iqacc_t;

  // Sample stream inside a capture window.
  typedef struct packed {
    logic  valid;
    logic  first;   // first sample of a capture window
    logic  last;    // last sample of a capture window
    iq16_t d;
  } iqs_t;

  // Wide stream after the Sum stage.
  typedef struct packed {
    logic   valid;
    logic   last;
    iqacc_t d;
  } accs_t;

  // One threshold line of the classifier: class bit = (a*I + b*Q >= c).
  typedef struct packed {
    logic signed [15:0] a;
    logic signed [15:0] b;
    logic signed [63:0] c;
  } thr_line_t;

  // Per-capture-unit settings.
  typedef struct packed {
    logic fir_bypass;
    logic dec_bypass;
    logic win_bypass;
    logic sum_bypass;
    logic cls_bypass;
    logic integrate;          // accumulate over repetitions before classification
    thr_line_t [1:0] thr;
  } cap_cfg_t;

  // Result word leaving a capture unit.
  typedef struct packed {
    logic       is_class;     // 1: cls holds a category, 0: val holds I/Q
    logic [1:0] cls;
    iqacc_t     val;
  } cap_word_t;

  // Timing-list entry: capture window inside one repetition, in samples.
  typedef struct packed {
    logic [23:0] start;
    logic [15:0] len;
  } tl_entry_t;

  // Host register write request (32-bit data, 24-bit word address).
  typedef struct packed {
    logic        we;
    logic [23:0] addr;
    logic [31:0] wdata;
  } host_req_t;

  // Sequence and schedule settings of one unit.
  typedef struct packed {
    logic [CNT_W-1:0] sched_time;
    logic [7:0]       skew;
    logic [15:0]      n_reps;
    logic [23:0]      rep_period;
    logic [4:0]       n_sections;
    logic [7:0]       cap_delay;
  } seq_cfg_t;

  // Register map: addr[23:20] selects a region.
  localparam logic [3:0] RG_CTRL  = 4'h0;  // [7:0]: see CR_* below
  localparam logic [3:0] RG_TXF   = 4'h1;  // [7:0] channel: transmit NCO word
  localparam logic [3:0] RG_AWG   = 4'h2;  // [11:4] channel, [0]: 0 start, 1 length
  localparam logic [3:0] RG_WMEM  = 4'h3;  // [19:14] channel, [13:0] sample address
  localparam logic [3:0] RG_TL    = 4'h4;  // [8:1] entry, [0]: 0 start, 1 length
  localparam logic [3:0] RG_CAP   = 4'h5;  // [19:12] capture unit, [3:0]: see CC_* below
  localparam logic [3:0] RG_FIR   = 4'h6;  // [19:12] capture unit, [11:0] tap
  localparam logic [3:0] RG_WIN   = 4'h7;  // [19:12] capture unit, [11:0] index

  localparam logic [7:0] CR_SCHED_LO = 8'h00;
  localparam logic [7:0] CR_SCHED_HI = 8'h01;
  localparam logic [7:0] CR_ARM      = 8'h02;
  localparam logic [7:0] CR_SKEW     = 8'h03;
  localparam logic [7:0] CR_NREPS    = 8'h04;
  localparam logic [7:0] CR_PERIOD   = 8'h05;
  localparam logic [7:0] CR_NSEC     = 8'h06;
  localparam logic [7:0] CR_CAPDLY   = 8'h07;
  localparam logic [7:0] CR_RXF      = 8'h10;  // + receive input index

  localparam logic [3:0] CC_CTRL  = 4'h0;  // [5:0] {integrate, cls, sum, win, dec, fir bypass}
  localparam logic [3:0] CC_AB0   = 4'h1;  // {b[31:16], a[15:0]} of line 0
  localparam logic [3:0] CC_C0LO  = 4'h2;
  localparam logic [3:0] CC_C0HI  = 4'h3;
  localparam logic [3:0] CC_AB1   = 4'h4;
  localparam logic [3:0] CC_C1LO  = 4'h5;
  localparam logic [3:0] CC_C1HI  = 4'h6;

  // Saturate a wide signed value to 16 bits.
  function automatic logic signed [SW-1:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return v[SW-1:0];
  endfunction

  // Round a Q1.15-scaled product sum back to sample scale and saturate.
  function automatic logic signed [SW-1:0] rnd_q15(input logic signed [63:0] v);
    logic signed [63:0] r;
    r = (v + 64'sd16384) >>> 15;
    return sat16(r);
  endfunction

  // Complex multiply a * b (or a * conj(b)) in Q1.15, rounded and saturated.
  function automatic iq16_t cmul_q15(input iq16_t a, input iq16_t b, input logic conj_b);
    logic signed [63:0] ai, aq, bi, bq, re, im;
    iq16_t r;
    ai = 64'(a.i); aq = 64'(a.q); bi = 64'(b.i);
    bq = conj_b ? -64'(b.q) : 64'(b.q);
    re = ai * bi - aq * bq;
    im = ai * bq + aq * bi;
    r.i = rnd_q15(re);
    r.q = rnd_q15(im);
    return r;
  endfunction

  function automatic iqacc_t widen(input iq16_t a);
    iqacc_t r;
    r.i = ACC_W'(a.i);
    r.q = ACC_W'(a.q);
    return r;
  endfunction

endpackage
