// unit_regs: host register file and address decoder of one unit. Every host
// write ({we, addr, wdata}) is registered once, then either updates a
// setting register here or becomes a write strobe into one of the unit's
// memories (waveforms, timing list, FIR taps, window weights).
//
// Address map (addr[23:20] = region, see qube_pkg RG_*):
//   0 control : sched_time lo/hi, arm (any write), skew, n_reps, rep_period,
//               n_sections, cap_delay, receive NCO words at 0x10 + input
//   1 transmit NCO word of channel addr[7:0]
//   2 playback range of channel addr[11:4]: addr[0]=0 start, 1 length
//   3 waveform sample: channel addr[19:14], address addr[13:0]
//   4 timing list: entry addr[8:1], field addr[0]
//   5 capture-unit settings: unit addr[19:12], register addr[3:0] (CC_*)
//   6 FIR tap, 7 window weight: unit addr[19:12], index addr[11:0]
// Capture units are numbered input * N_CAP + carrier. Writes to addresses
// that decode to nothing are ignored. Settings reset to zero (all capture
// stages active, classification on). The map is this design's own.
module unit_regs
  import qube_pkg::*;
#(
  parameter int N_AWG      = 16,
  parameter int N_RX       = 4,
  parameter int N_CAP      = 4,
  parameter int WAVE_DEPTH = 4096,
  parameter int TL_DEPTH   = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  host_req_t host,
  output seq_cfg_t  seq,
  output logic      arm,
  output logic [31:0] tx_freq   [N_AWG],
  output logic [$clog2(WAVE_DEPTH)-1:0] wave_start [N_AWG],
  output logic [$clog2(WAVE_DEPTH):0]   wave_len   [N_AWG],
  output logic [31:0] rx_freq   [N_RX],
  output cap_cfg_t  cap_cfg   [N_RX*N_CAP],
  // memory write strobes, sharing the address/data below
  output logic [N_AWG-1:0]       wmem_we,
  output logic [$clog2(WAVE_DEPTH)-1:0] wmem_addr,
  output logic                   tl_we,
  output logic [$clog2(TL_DEPTH)-1:0] tl_addr,
  output logic                   tl_field,
  output logic [N_RX*N_CAP-1:0]  fir_we,
  output logic [N_RX*N_CAP-1:0]  win_we,
  output logic [11:0]            coef_addr,
  output logic [31:0]            wdata
);
  localparam int NC = N_RX * N_CAP;
  host_req_t  h;
  logic [3:0] rg;
  logic [7:0] unit_ix;

  assign rg        = h.addr[23:20];
  assign unit_ix   = h.addr[19:12];
  assign wdata     = h.wdata;
  assign wmem_addr = h.addr[$clog2(WAVE_DEPTH)-1:0];
  assign tl_addr   = h.addr[$clog2(TL_DEPTH):1];
  assign tl_field  = h.addr[0];
  assign coef_addr = h.addr[11:0];

  always_comb begin
    wmem_we = '0;
    fir_we  = '0;
    win_we  = '0;
    tl_we   = h.we && rg == RG_TL && 32'(h.addr[19:9]) == 0;
    arm     = h.we && rg == RG_CTRL && h.addr[7:0] == CR_ARM;
    for (int c = 0; c < N_AWG; c++)
      wmem_we[c] = h.we && rg == RG_WMEM && 32'(h.addr[19:14]) == c &&
                   32'(h.addr[13:0]) < WAVE_DEPTH;
    for (int c = 0; c < NC; c++) begin
      fir_we[c] = h.we && rg == RG_FIR && 32'(unit_ix) == c;
      win_we[c] = h.we && rg == RG_WIN && 32'(unit_ix) == c;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h   <= '0;
      seq <= '0;
      for (int c = 0; c < N_AWG; c++) begin
        tx_freq[c] <= '0; wave_start[c] <= '0; wave_len[c] <= '0;
      end
      for (int r = 0; r < N_RX; r++) rx_freq[r] <= '0;
      for (int c = 0; c < NC; c++) cap_cfg[c] <= '0;
    end else begin
      h <= host;
      if (h.we) begin
        unique case (rg)
          RG_CTRL: begin
            unique case (h.addr[7:0])
              CR_SCHED_LO: seq.sched_time[31:0]  <= h.wdata;
              CR_SCHED_HI: seq.sched_time[63:32] <= h.wdata;
              CR_SKEW:     seq.skew       <= h.wdata[7:0];
              CR_NREPS:    seq.n_reps     <= h.wdata[15:0];
              CR_PERIOD:   seq.rep_period <= h.wdata[23:0];
              CR_NSEC:     seq.n_sections <= h.wdata[4:0];
              CR_CAPDLY:   seq.cap_delay  <= h.wdata[7:0];
              default:
                for (int r = 0; r < N_RX; r++)
                  if (h.addr[7:0] == CR_RXF + 8'(r)) rx_freq[r] <= h.wdata;
            endcase
          end
          RG_TXF:
            for (int c = 0; c < N_AWG; c++)
              if (32'(h.addr[7:0]) == c) tx_freq[c] <= h.wdata;
          RG_AWG:
            for (int c = 0; c < N_AWG; c++)
              if (32'(h.addr[11:4]) == c) begin
                if (h.addr[0]) wave_len[c]   <= h.wdata[$clog2(WAVE_DEPTH):0];
                else           wave_start[c] <= h.wdata[$clog2(WAVE_DEPTH)-1:0];
              end
          RG_CAP:
            for (int c = 0; c < NC; c++)
              if (32'(unit_ix) == c) begin
                unique case (h.addr[3:0])
                  CC_CTRL: {cap_cfg[c].integrate, cap_cfg[c].cls_bypass, cap_cfg[c].sum_bypass,
                            cap_cfg[c].win_bypass, cap_cfg[c].dec_bypass, cap_cfg[c].fir_bypass}
                             <= h.wdata[5:0];
                  CC_AB0:  {cap_cfg[c].thr[0].b, cap_cfg[c].thr[0].a} <= h.wdata;
                  CC_C0LO: cap_cfg[c].thr[0].c[31:0]  <= h.wdata;
                  CC_C0HI: cap_cfg[c].thr[0].c[63:32] <= h.wdata;
                  CC_AB1:  {cap_cfg[c].thr[1].b, cap_cfg[c].thr[1].a} <= h.wdata;
                  CC_C1LO: cap_cfg[c].thr[1].c[31:0]  <= h.wdata;
                  CC_C1HI: cap_cfg[c].thr[1].c[63:32] <= h.wdata;
                  default: ;
                endcase
              end
          default: ;
        endcase
      end
    end
  end

endmodule
