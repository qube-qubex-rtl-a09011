// qube_unit_fpga: digital signal path of one QuBE unit.
//
// Transmit: N_AWG channels, each a waveform memory, a playback sequencer
// (dac_interface) and a quadrature modulator with its own NCO. The channel
// outputs go to the converter's fine-NCO channels, where groups of three
// are combined per control port outside this design.
// Receive: N_RX inputs, each demodulated by its own NCO (conjugate carrier),
// then gated by adc_interface and fanned out to N_CAP capture units, one per
// readout carrier. Results leave on cap_out with cap_valid, toward the
// memory interface.
// Timing: time_counter follows the clock master; exec_scheduler fires at the
// scheduled count plus the unit's skew; the start clears every NCO phase and
// launches capture_gate, which starts playback at every repetition and opens
// the capture windows listed in the timing list.
// Latencies: host write to setting 2 cycles; start to first transmitted
// sample 2 (gate) + 2 (playback) + 2 (modulator) = 6 cycles; receive input
// to capture stream 2 (demodulator) + 1 cycles; capture stream to result 8
// cycles after a window's last sample.
// Signals left unused on purpose: the time counter's ref_edge strobe (the
// unit needs only the loaded count), the demodulator's valid (the converter
// delivers a sample every clock, so it is always high) and the integrators'
// overflow counters (kept as debug visibility inside capture_unit; this
// unit has no status register to read them through).
module qube_unit_fpga
  import qube_pkg::*;
#(
  parameter int N_AWG      = 16,
  parameter int N_RX       = 4,
  parameter int N_CAP      = 4,
  parameter int WAVE_DEPTH = 4096,
  parameter int FIR_TAPS   = 16,
  parameter int WIN_DEPTH  = 2048,
  parameter int INT_DEPTH  = 1024,
  parameter int TL_DEPTH   = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  host_req_t        host,
  input  logic             timing_ref,
  input  logic             sync_valid,
  input  logic [CNT_W-1:0] sync_value,
  input  iq16_t            adc_in     [N_RX],
  output iq16_t            dac_out    [N_AWG],
  output logic [N_AWG-1:0] dac_valid,
  output cap_word_t        cap_out    [N_RX*N_CAP],
  output logic [N_RX*N_CAP-1:0] cap_valid,
  output logic [N_RX*N_CAP-1:0] cap_last,
  output logic [CNT_W-1:0] count,
  output logic             synced,
  output logic             armed,
  output logic             busy,
  output logic             done,
  output logic             exec_start
);
  localparam int NC = N_RX * N_CAP;
  localparam int WA = $clog2(WAVE_DEPTH);

  seq_cfg_t    seq;
  logic        arm;
  logic [31:0] tx_freq [N_AWG];
  logic [WA-1:0] wave_start [N_AWG];
  logic [WA:0]   wave_len   [N_AWG];
  logic [31:0] rx_freq [N_RX];
  cap_cfg_t    cap_cfg [NC];
  logic [N_AWG-1:0] wmem_we;
  logic [WA-1:0]    wmem_addr;
  logic        tl_we, tl_field;
  logic [$clog2(TL_DEPTH)-1:0] tl_addr, tl_raddr;
  logic [NC-1:0] fir_we, win_we;
  logic [11:0] coef_addr;
  logic [31:0] wdata;
  tl_entry_t   tl_entry;
  logic        ref_edge;
  logic        awg_start, rep_start, first_rep, last_rep;
  logic        gate_open, gate_first, gate_last;

  unit_regs #(.N_AWG(N_AWG), .N_RX(N_RX), .N_CAP(N_CAP), .WAVE_DEPTH(WAVE_DEPTH),
              .TL_DEPTH(TL_DEPTH)) u_regs (
    .clk, .rst_n, .host, .seq, .arm, .tx_freq, .wave_start, .wave_len, .rx_freq,
    .cap_cfg, .wmem_we, .wmem_addr, .tl_we, .tl_addr, .tl_field, .fir_we, .win_we,
    .coef_addr, .wdata);

  time_counter u_tc (
    .clk, .rst_n, .timing_ref, .sync_valid, .sync_value, .count, .synced, .ref_edge);

  exec_scheduler u_sched (
    .clk, .rst_n, .arm, .sched_time(seq.sched_time), .skew(seq.skew), .count,
    .start(exec_start), .armed);

  timing_list #(.DEPTH(TL_DEPTH)) u_tl (
    .clk, .rst_n, .we(tl_we), .waddr(tl_addr), .wfield(tl_field), .wdata,
    .raddr(tl_raddr), .rdata(tl_entry));

  capture_gate #(.TL_DEPTH(TL_DEPTH)) u_gate (
    .clk, .rst_n, .start(exec_start), .n_reps(seq.n_reps), .rep_period(seq.rep_period),
    .n_sections(seq.n_sections), .tl_raddr, .tl_entry, .awg_start, .rep_start,
    .first_rep, .last_rep, .gate_open, .gate_first, .gate_last, .busy, .done);

  // ---------------- transmit channels ----------------
  for (genvar c = 0; c < N_AWG; c++) begin : g_tx
    logic [WA-1:0] raddr;
    iq16_t         rdata, play, lo;
    logic          play_v;

    waveform_memory #(.DEPTH(WAVE_DEPTH)) u_wmem (
      .clk, .we(wmem_we[c]), .waddr(wmem_addr), .wdata, .raddr, .rdata);

    dac_interface #(.DEPTH(WAVE_DEPTH)) u_dac (
      .clk, .rst_n, .start(awg_start), .wave_start(wave_start[c]), .wave_len(wave_len[c]),
      .mem_raddr(raddr), .mem_rdata(rdata), .dout(play), .dout_active(play_v));

    nco u_nco (.clk, .rst_n, .freq_word(tx_freq[c]), .phase_clear(exec_start), .lo);

    quad_mixer u_mod (
      .clk, .rst_n, .conj(1'b0), .din(play), .din_valid(play_v), .lo,
      .dout(dac_out[c]), .dout_valid(dac_valid[c]));
  end

  // ---------------- receive inputs ----------------
  for (genvar r = 0; r < N_RX; r++) begin : g_rx
    iq16_t lo, dem;
    logic  dem_v;
    iqs_t  cap_in;

    nco u_nco (.clk, .rst_n, .freq_word(rx_freq[r]), .phase_clear(exec_start), .lo);

    quad_mixer u_demod (
      .clk, .rst_n, .conj(1'b1), .din(adc_in[r]), .din_valid(1'b1), .lo,
      .dout(dem), .dout_valid(dem_v));

    adc_interface #(.MAX_DELAY(256)) u_adc_if (
      .clk, .rst_n, .din(dem), .cap_delay(seq.cap_delay), .gate_open, .gate_first,
      .gate_last, .dout(cap_in));

    for (genvar k = 0; k < N_CAP; k++) begin : g_cap
      logic [15:0] ovf;
      capture_unit #(.FIR_TAPS(FIR_TAPS), .WIN_DEPTH(WIN_DEPTH), .INT_DEPTH(INT_DEPTH)) u_cap (
        .clk, .rst_n, .cfg(cap_cfg[r*N_CAP+k]), .fir_we(fir_we[r*N_CAP+k]),
        .win_we(win_we[r*N_CAP+k]), .coef_addr, .coef_wdata(wdata), .rep_start,
        .first_rep, .last_rep, .din(cap_in), .dout(cap_out[r*N_CAP+k]),
        .dout_valid(cap_valid[r*N_CAP+k]), .dout_last(cap_last[r*N_CAP+k]),
        .int_overflow(ovf));
    end
  end

endmodule
