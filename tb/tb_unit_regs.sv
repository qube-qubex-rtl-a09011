// tb_unit_regs: issues random host writes to every register region and
// checks, against a reference copy of the register file, (a) the memory
// write strobes, shared address and data on the clock after the request and
// (b) every configuration output on the clock after that. Writes to
// unmapped addresses must change nothing.
// The register map is this design's own; the source does not give one.
module tb_unit_regs;
  import qube_pkg::*;
  localparam int N_AWG = 16, N_RX = 4, N_CAP = 4, WD = 4096, TLD = 16, NC = N_RX * N_CAP;
  logic clk = 1'b0, rst_n = 1'b0;
  host_req_t host;
  seq_cfg_t seq, m_seq;
  logic arm;
  logic [31:0] tx_freq [N_AWG], m_tx [N_AWG];
  logic [11:0] wave_start [N_AWG], m_ws [N_AWG];
  logic [12:0] wave_len [N_AWG], m_wl [N_AWG];
  logic [31:0] rx_freq [N_RX], m_rx [N_RX];
  cap_cfg_t cap_cfg [NC], m_cap [NC];
  logic [N_AWG-1:0] wmem_we;
  logic [11:0] wmem_addr;
  logic tl_we, tl_field;
  logic [3:0] tl_addr;
  logic [NC-1:0] fir_we, win_we;
  logic [11:0] coef_addr;
  logic [31:0] wdata;
  int checks = 0, failures = 0;

  unit_regs #(.N_AWG(N_AWG), .N_RX(N_RX), .N_CAP(N_CAP), .WAVE_DEPTH(WD), .TL_DEPTH(TLD)) dut (
    .clk, .rst_n, .host, .seq, .arm, .tx_freq, .wave_start, .wave_len, .rx_freq, .cap_cfg,
    .wmem_we, .wmem_addr, .tl_we, .tl_addr, .tl_field, .fir_we, .win_we, .coef_addr, .wdata);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic check_state();
    chk(seq === m_seq, "seq");
    for (int c = 0; c < N_AWG; c++)
      chk(tx_freq[c] === m_tx[c] && wave_start[c] === m_ws[c] && wave_len[c] === m_wl[c], "awg regs");
    for (int r = 0; r < N_RX; r++) chk(rx_freq[r] === m_rx[r], "rx_freq");
    for (int c = 0; c < NC; c++) chk(cap_cfg[c] === m_cap[c], $sformatf("cap_cfg %0d", c));
  endtask

  initial begin
    host = '0;
    m_seq = '0;
    for (int c = 0; c < N_AWG; c++) begin m_tx[c] = '0; m_ws[c] = '0; m_wl[c] = '0; end
    for (int r = 0; r < N_RX; r++) m_rx[r] = '0;
    for (int c = 0; c < NC; c++) m_cap[c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check_state();
    for (int n = 0; n < 3000; n++) begin
      int kind, ch, cu, ent;
      logic [23:0] a;
      logic [31:0] d;
      logic [N_AWG-1:0] e_wmem;
      logic [NC-1:0] e_fir, e_win;
      bit e_tl, e_arm;
      kind = $urandom_range(0, 9);
      ch = $urandom_range(0, N_AWG - 1);
      cu = $urandom_range(0, NC - 1);
      d = $urandom;
      e_wmem = '0; e_fir = '0; e_win = '0; e_tl = 0; e_arm = 0;
      case (kind)
        0: begin   // sequencer control register, including unmapped ones
          logic [7:0] o;
          o = 8'($urandom_range(0, 24));
          a = {RG_CTRL, 12'h0, o};
          case (o)
            CR_SCHED_LO: m_seq.sched_time[31:0] = d;
            CR_SCHED_HI: m_seq.sched_time[63:32] = d;
            CR_ARM:      e_arm = 1;
            CR_SKEW:     m_seq.skew = d[7:0];
            CR_NREPS:    m_seq.n_reps = d[15:0];
            CR_PERIOD:   m_seq.rep_period = d[23:0];
            CR_NSEC:     m_seq.n_sections = d[4:0];
            CR_CAPDLY:   m_seq.cap_delay = d[7:0];
            default: if (o >= CR_RXF && o < CR_RXF + N_RX) m_rx[o - CR_RXF] = d;
          endcase
        end
        1: begin a = {RG_TXF, 12'h0, 8'(ch)}; m_tx[ch] = d; end
        2: begin
          bit f;
          f = 1'($urandom);
          a = {RG_AWG, 8'h0, 8'(ch), 3'b0, f};
          if (f) m_wl[ch] = d[12:0]; else m_ws[ch] = d[11:0];
        end
        3: begin
          logic [13:0] wa;
          wa = 14'($urandom_range(0, 5000));
          a = {RG_WMEM, 6'(ch), wa};
          if (wa < WD) e_wmem[ch] = 1;
        end
        4: begin
          ent = $urandom_range(0, TLD - 1);
          a = {RG_TL, 15'h0, 4'(ent), 1'($urandom)};
          e_tl = 1;
        end
        5, 6: begin
          logic [3:0] o;
          o = 4'($urandom_range(0, 8));
          a = {RG_CAP, 8'(cu), 8'h0, o};
          case (o)
            CC_CTRL: {m_cap[cu].integrate, m_cap[cu].cls_bypass, m_cap[cu].sum_bypass,
                      m_cap[cu].win_bypass, m_cap[cu].dec_bypass, m_cap[cu].fir_bypass} = d[5:0];
            CC_AB0:  {m_cap[cu].thr[0].b, m_cap[cu].thr[0].a} = d;
            CC_C0LO: m_cap[cu].thr[0].c[31:0] = d;
            CC_C0HI: m_cap[cu].thr[0].c[63:32] = d;
            CC_AB1:  {m_cap[cu].thr[1].b, m_cap[cu].thr[1].a} = d;
            CC_C1LO: m_cap[cu].thr[1].c[31:0] = d;
            CC_C1HI: m_cap[cu].thr[1].c[63:32] = d;
            default: ;
          endcase
        end
        7: begin a = {RG_FIR, 8'(cu), 12'($urandom_range(0, 15))}; e_fir[cu] = 1; end
        8: begin a = {RG_WIN, 8'(cu), 12'($urandom_range(0, 2047))}; e_win[cu] = 1; end
        default: a = {4'($urandom_range(8, 15)), 20'($urandom)};  // unmapped region
      endcase
      @(negedge clk);
      host.we = 1'b1; host.addr = a; host.wdata = d;
      @(negedge clk);
      host = '0;
      chk(wmem_we === e_wmem && fir_we === e_fir && win_we === e_win && tl_we === e_tl &&
          arm === e_arm, $sformatf("strobes kind %0d", kind));
      chk(wdata === d, "wdata");
      if (kind == 3) chk(wmem_addr === a[11:0], "wmem_addr");
      if (kind == 4) chk(tl_addr === a[4:1] && tl_field === a[0], "tl addr");
      if (kind == 7 || kind == 8) chk(coef_addr === a[11:0], "coef_addr");
      @(negedge clk);
      chk(wmem_we === '0 && fir_we === '0 && win_we === '0 && !tl_we && !arm, "strobe width");
      check_state();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
