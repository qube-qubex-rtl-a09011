// tb_qube_system: full-size end-to-end test of the 12-unit system with
// default parameters. The reference clock runs at 1/100 of the system
// clock. All units are programmed through their host ports with two
// carriers (3/64 and 11/64 of the sample rate), constant-envelope
// waveforms on transmit channels 0 and 1 and a one-window timing list;
// every unit gets a different skew. Each unit's receive input 0 sees the sum
// of its transmit channels 0 and 1, input 1 sees channel 0 only. Captures
// 0..3 (input 0) and 4..5 (input 1) use different configurations.
// Mechanisms counted (each must happen at least once, otherwise it is a
// failure): time synchronisation, scheduled start, per-unit skew, waveform
// playback, gate windows, decimation, window-and-sum, stage bypass, FIR
// band selection, demultiplexing, integration, classification,
// classification bypass, capture delay and integrator overflow.
// Unit count and per-unit sizes are the source's defaults; the stimulus is this testbench's own.
module tb_qube_system;
  import qube_pkg::*;
  localparam int NU = 12, NA = 16, NR = 4, NK = 4, NC = NR * NK;
  localparam logic [31:0] F1 = 32'd3 << 26, F2 = 32'd11 << 26;
  localparam int A1 = 8000, A2 = 6000, NREP = 4, PER = 192, WST = 40, WLEN = 64, WAVE = 160;
  typedef enum int {M_SYNC, M_START, M_SKEW, M_PLAY, M_GATE, M_DEC, M_SUM, M_BYP, M_FIR,
                    M_DEMUX, M_INT, M_CLS, M_CLSBYP, M_DELAY, M_OVF, M_N} mech_t;
  logic clk = 1'b0, rst_n = 1'b0, timing_ref = 1'b0;
  host_req_t host [NU];
  iq16_t adc_in [NU][NR];
  iq16_t dac_out [NU][NA];
  logic [NA-1:0] dac_valid [NU];
  cap_word_t cap_out [NU][NC];
  logic [NC-1:0] cap_valid [NU], cap_last [NU];
  logic [CNT_W-1:0] master_count, unit_count [NU];
  logic [NU-1:0] synced, armed, busy, done, exec_start;
  int checks = 0, failures = 0;
  int mech [M_N];

  qube_system dut (.clk, .rst_n, .timing_ref, .host, .adc_in, .dac_out, .dac_valid, .cap_out,
    .cap_valid, .cap_last, .master_count, .unit_count, .synced, .armed, .busy, .done, .exec_start);
  always #5 clk = ~clk;
  always #500 timing_ref = ~timing_ref;

  always_comb
    for (int u = 0; u < NU; u++) begin
      adc_in[u][0].i = sat16(64'(dac_out[u][0].i) + 64'(dac_out[u][1].i));
      adc_in[u][0].q = sat16(64'(dac_out[u][0].q) + 64'(dac_out[u][1].q));
      adc_in[u][1]   = dac_out[u][0];
      adc_in[u][2]   = '0;
      adc_in[u][3]   = '0;
    end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input mech_t m, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
    else mech[m]++;
  endtask

  task automatic hw(input int u, input logic [23:0] a, input logic [31:0] d);
    // u < 0 writes all units
    @(negedge clk);
    for (int k = 0; k < NU; k++)
      if (u < 0 || u == k) begin host[k].we = 1'b1; host[k].addr = a; host[k].wdata = d; end
    @(negedge clk);
    for (int k = 0; k < NU; k++) host[k] = '0;
  endtask

  // monitors
  int n_dac [NU], n_cap [NU][NC], t_start [NU], gate_t [NU], dly_err, n_adc_first;
  cap_word_t last_word [NU][NC];
  logic [CNT_W-1:0] sched;
  always @(posedge clk) begin
    #1;
    if (rst_n)
      for (int u = 0; u < NU; u++) begin
        if (dac_valid[u][0]) n_dac[u]++;
        for (int c = 0; c < NC; c++)
          if (cap_valid[u][c]) begin n_cap[u][c]++; last_word[u][c] = cap_out[u][c]; end
        if (exec_start[u]) t_start[u] = int'(unit_count[u] - sched);
      end
  end
  logic [15:0] ovf5 [NU];
  for (genvar u = 0; u < NU; u++) begin : g_mon
    assign ovf5[u] = dut.g_unit[u].u_unit.g_rx[1].g_cap[1].u_cap.int_overflow;
    always @(posedge clk) begin
      #1;
      if (dut.g_unit[u].u_unit.gate_first) gate_t[u] = 0; else gate_t[u]++;
      if (dut.g_unit[u].u_unit.g_rx[0].u_adc_if.dout.first) begin
        n_adc_first++;
        if (gate_t[u] != 32'(dut.g_unit[u].u_unit.seq.cap_delay) + 1) dly_err++;
      end
    end
  end

  task automatic clear_counts();
    for (int u = 0; u < NU; u++) begin
      n_dac[u] = 0; t_start[u] = -1;
      for (int c = 0; c < NC; c++) n_cap[u][c] = 0;
    end
    dly_err = 0; n_adc_first = 0;
  endtask

  task automatic run(input int dly);
    hw(-1, {RG_CTRL, 12'h0, CR_CAPDLY}, 32'(dly));
    sched = master_count + 300;
    hw(-1, {RG_CTRL, 12'h0, CR_SCHED_LO}, sched[31:0]);
    hw(-1, {RG_CTRL, 12'h0, CR_SCHED_HI}, sched[63:32]);
    hw(-1, {RG_CTRL, 12'h0, CR_ARM}, 0);
    wait (done[NU-1]);
    repeat (60) @(negedge clk);
  endtask

  initial begin
    cap_word_t s;
    for (int u = 0; u < NU; u++) host[u] = '0;
    for (int m = 0; m < M_N; m++) mech[m] = 0;
    for (int u = 0; u < NU; u++) gate_t[u] = 0;
    clear_counts();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // time synchronisation from the master over the reference clock
    wait (&synced);
    repeat (2000) begin
      bit ok;
      @(negedge clk);
      ok = 1;
      for (int u = 0; u < NU; u++) ok &= (unit_count[u] == master_count);
      chk(ok, M_SYNC, "unit counters equal master counter");
    end
    // program all units
    for (int u = 0; u < NU; u++) hw(u, {RG_CTRL, 12'h0, CR_SKEW}, 32'(u));
    hw(-1, {RG_TXF, 12'h0, 8'd0}, F1);
    hw(-1, {RG_TXF, 12'h0, 8'd1}, F2);
    hw(-1, {RG_CTRL, 12'h0, CR_RXF}, F1);
    hw(-1, {RG_CTRL, 12'h0, CR_RXF + 8'd1}, F1);
    for (int a = 0; a < WAVE; a++) begin
      hw(-1, {RG_WMEM, 6'd0, 14'(a)}, {16'd0, 16'(A1)});
      hw(-1, {RG_WMEM, 6'd1, 14'(a)}, {16'd0, 16'(A2)});
    end
    for (int c = 0; c < 2; c++) begin
      hw(-1, {RG_AWG, 8'h0, 8'(c), 4'h0}, 0);
      hw(-1, {RG_AWG, 8'h0, 8'(c), 4'h1}, WAVE);
    end
    hw(-1, {RG_TL, 15'h0, 4'd0, 1'b0}, WST);
    hw(-1, {RG_TL, 15'h0, 4'd0, 1'b1}, WLEN);
    hw(-1, {RG_CTRL, 12'h0, CR_NSEC}, 1);
    hw(-1, {RG_CTRL, 12'h0, CR_NREPS}, NREP);
    hw(-1, {RG_CTRL, 12'h0, CR_PERIOD}, PER);
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < 16; k++) hw(-1, {RG_WIN, 8'(c), 12'(k)}, 32'h0000_7fff);
    // capture 3: FIR taps form an 8-sample moving average (Q1.15 0.125),
    // which nulls the second carrier, 8/64 of the sample rate away
    for (int k = 0; k < 16; k++) hw(-1, {RG_FIR, 8'd3, 12'(k)}, (k < 8) ? 32'h0000_1000 : 32'h0);
    // input 0 -> 0: full chain  1: integrating  2: window and sum bypassed
    // (decimated stream)  3: FIR filter, sum bypassed
    // input 1 -> 4: full chain, classification bypassed  5: all of FIR,
    // decimation, window and sum bypassed
    hw(-1, {RG_CAP, 8'd0, 8'h0, CC_CTRL}, 32'b000000);
    hw(-1, {RG_CAP, 8'd1, 8'h0, CC_CTRL}, 32'b100000);
    hw(-1, {RG_CAP, 8'd2, 8'h0, CC_CTRL}, 32'b001100);
    hw(-1, {RG_CAP, 8'd3, 8'h0, CC_CTRL}, 32'b001000);
    hw(-1, {RG_CAP, 8'd4, 8'h0, CC_CTRL}, 32'b010000);
    hw(-1, {RG_CAP, 8'd5, 8'h0, CC_CTRL}, 32'b001111);
    for (int c = 0; c < NC; c++) begin
      hw(-1, {RG_CAP, 8'(c), 8'h0, CC_AB0}, {16'd0, 16'd1});   // I >= 0
      hw(-1, {RG_CAP, 8'(c), 8'h0, CC_AB1}, {16'd1, 16'd0});   // Q >= 0
    end

    // execution 1: no capture delay
    clear_counts();
    run(0);
    for (int u = 0; u < NU; u++) begin
      longint di, dq, mi, mq;
      real mag;
      chk(t_start[u] == u + 1, u == 0 ? M_START : M_SKEW, $sformatf("unit %0d start at %0d", u, t_start[u]));
      chk(n_dac[u] == NREP * WAVE, M_PLAY, $sformatf("unit %0d playback %0d", u, n_dac[u]));
      chk(n_cap[u][0] == NREP && n_cap[u][4] == NREP, M_GATE, "one result per window");
      chk(n_cap[u][2] == NREP * WLEN / 4, M_DEC, $sformatf("decimated count %0d", n_cap[u][2]));
      chk(n_cap[u][5] == NREP * WLEN, M_BYP, $sformatf("bypassed count %0d", n_cap[u][5]));
      chk(n_cap[u][1] == 1 && last_word[u][1].val.i == NREP * last_word[u][0].val.i &&
          last_word[u][1].val.q == NREP * last_word[u][0].val.q, M_INT, "integration");
      s = last_word[u][0];
      chk(s.is_class && s.cls == {s.val.q >= 0, s.val.i >= 0}, M_CLS, "classification");
      chk(!last_word[u][4].is_class && last_word[u][4].cls == 2'b00, M_CLSBYP, "classification bypass");
      mi = longint'(last_word[u][4].val.i); mq = longint'(last_word[u][4].val.q);
      di = longint'(s.val.i) - mi; dq = longint'(s.val.q) - mq;
      mag = $sqrt(real'(mi * mi + mq * mq));
      chk(mag > 0.98 * 16 * A1 && mag < 1.02 * 16 * A1, M_SUM, $sformatf("window sum magnitude %f", mag));
      chk(di < 64 && di > -64 && dq < 64 && dq > -64, M_DEMUX, "second carrier rejected by window sum");
      // last sample of the window: FIR-filtered input 0 (capture 3) must
      // equal unfiltered input 1 (capture 5) and differ from unfiltered
      // input 0 (capture 2)
      di = longint'(last_word[u][3].val.i) - longint'(last_word[u][5].val.i);
      dq = longint'(last_word[u][3].val.q) - longint'(last_word[u][5].val.q);
      chk(di < 4 && di > -4 && dq < 4 && dq > -4, M_FIR, "FIR rejects the second carrier");
      chk(last_word[u][3].val.i != last_word[u][2].val.i || last_word[u][3].val.q != last_word[u][2].val.q,
          M_FIR, "FIR changes the stream");
    end
    chk(dly_err == 0 && n_adc_first == NU * NREP, M_GATE, "gate markers without delay");

    // execution 2: capture delay 9
    clear_counts();
    run(9);
    chk(dly_err == 0 && n_adc_first == NU * NREP, M_DELAY, "capture delay 9");
    for (int u = 0; u < NU; u++) chk(t_start[u] == u + 1, M_SKEW, "skew repeat");

    // execution 3: one repetition with a 1100-sample window; capture 5
    // integrates every raw sample, more than its 1024 entries
    hw(-1, {RG_CTRL, 12'h0, CR_NREPS}, 1);
    hw(-1, {RG_CTRL, 12'h0, CR_PERIOD}, 1300);
    hw(-1, {RG_TL, 15'h0, 4'd0, 1'b1}, 1100);
    hw(-1, {RG_CAP, 8'd5, 8'h0, CC_CTRL}, 32'b101111);
    clear_counts();
    run(0);
    for (int u = 0; u < NU; u++) begin
      chk(ovf5[u] == 16'd76, M_OVF, $sformatf("unit %0d integrator overflow count %0d", u, ovf5[u]));
      chk(n_cap[u][5] == 1024 && n_cap[u][0] == 1, M_OVF, $sformatf("results with overflow %0d", n_cap[u][5]));
    end

    for (int m = 0; m < M_N; m++) begin
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism %s never happened", mech_t'(m)); end
    end
    for (int m = 0; m < M_N; m++) $display("mechanism %s: %0d", mech_t'(m), mech[m]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
