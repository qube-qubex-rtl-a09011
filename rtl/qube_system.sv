// qube_system: the synchronised multi-unit controller. One clock-master
// counter (sync_master) and N_UNITS unit FPGAs share the 62.5 kHz timing
// reference; the master's counter values reach every unit over the Sync
// path, so all unit counters agree and executions scheduled at the same
// count start together (up to each unit's skew setting). Each unit has its
// own host register port, receive inputs, transmit outputs and capture
// results. In hardware every unit runs on its own copy of the distributed
// 250 MHz clock; here one clock drives all of them.
// The unit count and the shared reference follow the paper; the form of
// the sync message and the host ports are this design's choices.
// Generic synthesis of the full 12-unit system is slow (every unit holds
// 256 complex FIR multipliers and 32 CORDIC pipelines); the units also
// synthesise on their own.
module qube_system
  import qube_pkg::*;
#(
  parameter int N_UNITS    = 12,
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
  input  logic             timing_ref,
  input  host_req_t        host      [N_UNITS],
  input  iq16_t            adc_in    [N_UNITS][N_RX],
  output iq16_t            dac_out   [N_UNITS][N_AWG],
  output logic [N_AWG-1:0] dac_valid [N_UNITS],
  output cap_word_t        cap_out   [N_UNITS][N_RX*N_CAP],
  output logic [N_RX*N_CAP-1:0] cap_valid [N_UNITS],
  output logic [N_RX*N_CAP-1:0] cap_last  [N_UNITS],
  output logic [CNT_W-1:0] master_count,
  output logic [CNT_W-1:0] unit_count [N_UNITS],
  output logic [N_UNITS-1:0] synced,
  output logic [N_UNITS-1:0] armed,
  output logic [N_UNITS-1:0] busy,
  output logic [N_UNITS-1:0] done,
  output logic [N_UNITS-1:0] exec_start
);
  logic             sync_valid;
  logic [CNT_W-1:0] sync_value;

  sync_master u_master (
    .clk, .rst_n, .timing_ref, .count(master_count), .sync_valid, .sync_value);

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    qube_unit_fpga #(
      .N_AWG(N_AWG), .N_RX(N_RX), .N_CAP(N_CAP), .WAVE_DEPTH(WAVE_DEPTH),
      .FIR_TAPS(FIR_TAPS), .WIN_DEPTH(WIN_DEPTH), .INT_DEPTH(INT_DEPTH), .TL_DEPTH(TL_DEPTH)
    ) u_unit (
      .clk, .rst_n, .host(host[u]), .timing_ref, .sync_valid, .sync_value,
      .adc_in(adc_in[u]), .dac_out(dac_out[u]), .dac_valid(dac_valid[u]),
      .cap_out(cap_out[u]), .cap_valid(cap_valid[u]), .cap_last(cap_last[u]),
      .count(unit_count[u]), .synced(synced[u]), .armed(armed[u]), .busy(busy[u]),
      .done(done[u]), .exec_start(exec_start[u]));
  end

endmodule
