// capture_unit: one readout channel of the capture module, i.e. one of the
// up to four demultiplexed carriers of a receive input. The chain is
//   complex_fir -> decimator (1/4) -> complex_window -> sum_unit
//   -> integrator -> classifier,
// each stage with its own bypass bit in cfg, in the order of the source's
// DSP diagram. cfg.integrate accumulates over repetitions (averaging);
// otherwise every shot leaves on its own. The classifier, unless bypassed,
// turns each value into a category. Typical settings: per-shot classified
// readout (integrate = 0, classifier on), averaged integrated value
// (integrate = 1, classifier bypassed), averaged trace (Sum bypassed,
// integrate = 1, classifier bypassed).
// Latency from input to result: 1 + 1 + 2 + 1 + 2 + 1 = 8 cycles after the
// window's last sample.
// coef_addr[11] is unused at the default sizes: the window memory
// (WIN_DEPTH = 2048) needs 11 address bits and the FIR fewer; the port is
// 12 bits wide so that a 4096-entry window fits the same register map.
module capture_unit
  import qube_pkg::*;
#(
  parameter int FIR_TAPS  = 16,
  parameter int WIN_DEPTH = 2048,
  parameter int INT_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cap_cfg_t    cfg,
  input  logic        fir_we,
  input  logic        win_we,
  input  logic [11:0] coef_addr,
  input  logic [31:0] coef_wdata,
  input  logic        rep_start,
  input  logic        first_rep,
  input  logic        last_rep,
  input  iqs_t        din,
  output cap_word_t   dout,
  output logic        dout_valid,
  output logic        dout_last,
  output logic [15:0] int_overflow
);
  iqs_t  s_fir, s_dec, s_win;
  accs_t s_sum, s_int;

  complex_fir #(.TAPS(FIR_TAPS)) u_fir (
    .clk, .rst_n, .coef_we(fir_we), .coef_addr(coef_addr[$clog2(FIR_TAPS)-1:0]),
    .coef_wdata, .bypass(cfg.fir_bypass), .din, .dout(s_fir));

  decimator #(.FACTOR(4)) u_dec (
    .clk, .rst_n, .bypass(cfg.dec_bypass), .din(s_fir), .dout(s_dec));

  complex_window #(.DEPTH(WIN_DEPTH)) u_win (
    .clk, .rst_n, .coef_we(win_we), .coef_addr(coef_addr[$clog2(WIN_DEPTH)-1:0]),
    .coef_wdata, .bypass(cfg.win_bypass), .din(s_dec), .dout(s_win));

  sum_unit u_sum (
    .clk, .rst_n, .bypass(cfg.sum_bypass), .din(s_win), .dout(s_sum));

  integrator #(.DEPTH(INT_DEPTH)) u_int (
    .clk, .rst_n, .enable(cfg.integrate), .rep_start, .first_rep, .last_rep,
    .din(s_sum), .dout(s_int), .overflow(int_overflow));

  classifier u_cls (
    .clk, .rst_n, .bypass(cfg.cls_bypass), .thr(cfg.thr), .din(s_int),
    .dout, .dout_valid, .dout_last);

endmodule
