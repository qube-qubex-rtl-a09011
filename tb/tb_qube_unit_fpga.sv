// tb_qube_unit_fpga: end-to-end test of one controller unit (reduced to 2
// transmit channels, 2 receive inputs and 2 capture units per input). The
// host interface programs two carriers (3/64 and 11/64 of the sample rate),
// constant-envelope waveforms, a one-window timing list, thresholds and
// capture configurations. Receive input 0 sees the sum of both transmit
// channels (frequency-multiplexed readout), input 1 sees channel 0 only.
// Checked: time counter load at the reference edge, start at the scheduled
// time plus skew, playback length per repetition, capture delay of the
// gate markers, output counts per capture configuration, demultiplexing
// (input 0 result equals input 1 result, magnitude 16 * amplitude),
// integration (equals 4 single repetitions exactly) and classification.
// Sizes are reduced here; carriers sit on the source's 23.4375 MHz NCO grid.
module tb_qube_unit_fpga;
  import qube_pkg::*;
  localparam int NA = 2, NR = 2, NK = 2, NC = NR * NK;
  localparam logic [31:0] F1 = 32'd3 << 26, F2 = 32'd11 << 26;
  localparam int A1 = 8000, A2 = 6000, NREP = 4, PER = 192, WST = 40, WLEN = 64;
  logic clk = 1'b0, rst_n = 1'b0, timing_ref = 1'b0, sync_valid = 1'b0;
  logic [CNT_W-1:0] sync_value, count;
  host_req_t host;
  iq16_t adc_in [NR];
  iq16_t dac_out [NA];
  logic [NA-1:0] dac_valid;
  cap_word_t cap_out [NC];
  logic [NC-1:0] cap_valid, cap_last;
  logic synced, armed, busy, done, exec_start;
  int checks = 0, failures = 0;

  qube_unit_fpga #(.N_AWG(NA), .N_RX(NR), .N_CAP(NK), .WAVE_DEPTH(256), .FIR_TAPS(16),
    .WIN_DEPTH(64), .INT_DEPTH(16), .TL_DEPTH(4)) dut (
    .clk, .rst_n, .host, .timing_ref, .sync_valid, .sync_value, .adc_in, .dac_out, .dac_valid,
    .cap_out, .cap_valid, .cap_last, .count, .synced, .armed, .busy, .done, .exec_start);
  always #5 clk = ~clk;
  always #500 timing_ref = ~timing_ref;      // 100 clocks per reference period

  function automatic logic signed [15:0] add_sat(input logic signed [15:0] a, b);
    return sat16(64'(a) + 64'(b));
  endfunction
  always_comb begin
    adc_in[0].i = add_sat(dac_out[0].i, dac_out[1].i);
    adc_in[0].q = add_sat(dac_out[0].q, dac_out[1].q);
    adc_in[1]   = dac_out[0];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic hw(input logic [23:0] a, input logic [31:0] d);
    @(negedge clk);
    host.we = 1'b1; host.addr = a; host.wdata = d;
    @(negedge clk);
    host = '0;
  endtask

  // monitors
  int n_dac [NA], n_cap [NC], n_start, n_first_gate, n_first_adc, dly_err;
  cap_word_t last_word [NC];
  int gate_t;
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      for (int c = 0; c < NA; c++) if (dac_valid[c]) n_dac[c]++;
      for (int c = 0; c < NC; c++) if (cap_valid[c]) begin n_cap[c]++; last_word[c] = cap_out[c]; end
      if (exec_start) n_start++;
      if (dut.gate_first) begin n_first_gate++; gate_t = 0; end else gate_t++;
      if (dut.g_rx[0].u_adc_if.dout.first) begin
        n_first_adc++;
        if (gate_t != 32'(dut.seq.cap_delay) + 1)
          begin dly_err++; $display("adc first %0d after gate first, delay %0d", gate_t, dut.seq.cap_delay); end
      end
    end
  end

  task automatic run(input int dly, input int skew, output int t_start);
    logic [CNT_W-1:0] st;
    hw({RG_CTRL, 12'h0, CR_CAPDLY}, 32'(dly));
    hw({RG_CTRL, 12'h0, CR_SKEW}, 32'(skew));
    st = count + 200;
    hw({RG_CTRL, 12'h0, CR_SCHED_LO}, st[31:0]);
    hw({RG_CTRL, 12'h0, CR_SCHED_HI}, st[63:32]);
    hw({RG_CTRL, 12'h0, CR_ARM}, 0);
    @(posedge exec_start); #1;
    t_start = int'(count - st);
    wait (done);
    repeat (40) @(negedge clk);
  endtask

  initial begin
    int ts;
    cap_word_t single [NC];
    host = '0; sync_value = '0;
    for (int c = 0; c < NA; c++) n_dac[c] = 0;
    for (int c = 0; c < NC; c++) n_cap[c] = 0;
    n_start = 0; n_first_gate = 0; n_first_adc = 0; dly_err = 0; gate_t = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // time synchronisation: value loads at the next reference edge
    repeat (30) @(negedge clk);
    sync_valid = 1'b1; sync_value = 64'd5_000_000;
    @(negedge clk) sync_valid = 1'b0;
    @(posedge synced); #1;
    chk(count == 64'd5_000_000, "count loaded at reference edge");
    @(posedge dut.u_tc.ref_edge);
    // program carriers and waveforms
    hw({RG_TXF, 12'h0, 8'd0}, F1);
    hw({RG_TXF, 12'h0, 8'd1}, F2);
    hw({RG_CTRL, 12'h0, CR_RXF}, F1);
    hw({RG_CTRL, 12'h0, CR_RXF + 8'd1}, F1);
    for (int a = 0; a < 160; a++) begin
      hw({RG_WMEM, 6'd0, 14'(a)}, {16'd0, 16'(A1)});
      hw({RG_WMEM, 6'd1, 14'(a)}, {16'd0, 16'(A2)});
    end
    for (int c = 0; c < NA; c++) begin
      hw({RG_AWG, 8'h0, 8'(c), 4'h0}, 0);
      hw({RG_AWG, 8'h0, 8'(c), 4'h1}, 160);
    end
    hw({RG_TL, 15'h0, 4'd0, 1'b0}, WST);
    hw({RG_TL, 15'h0, 4'd0, 1'b1}, WLEN);
    hw({RG_CTRL, 12'h0, CR_NSEC}, 1);
    hw({RG_CTRL, 12'h0, CR_NREPS}, NREP);
    hw({RG_CTRL, 12'h0, CR_PERIOD}, PER);
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < 64; k++) hw({RG_WIN, 8'(c), 12'(k)}, 32'h0000_7fff);
    // capture 0: full chain; 1: integrating; 2: classification bypassed;
    // 3: decimation, window and sum bypassed
    hw({RG_CAP, 8'd0, 8'h0, CC_CTRL}, 32'b000000);
    hw({RG_CAP, 8'd1, 8'h0, CC_CTRL}, 32'b100000);
    hw({RG_CAP, 8'd2, 8'h0, CC_CTRL}, 32'b010000);
    hw({RG_CAP, 8'd3, 8'h0, CC_CTRL}, 32'b001110);
    for (int c = 0; c < NC; c++) begin
      hw({RG_CAP, 8'(c), 8'h0, CC_AB0}, {16'd0, 16'd1});       // I >= 0
      hw({RG_CAP, 8'(c), 8'h0, CC_AB1}, {16'd1, 16'd0});       // Q >= 0
    end
    // first execution: no capture delay, skew 0
    run(0, 0, ts);
    chk(ts == 1, $sformatf("start at sched+1 (got %0d)", ts));
    for (int c = 0; c < NA; c++) chk(n_dac[c] == NREP * 160, $sformatf("playback length %0d", n_dac[c]));
    chk(n_cap[0] == NREP && n_cap[1] == 1 && n_cap[2] == NREP && n_cap[3] == NREP * WLEN,
        $sformatf("capture counts %0d %0d %0d %0d", n_cap[0], n_cap[1], n_cap[2], n_cap[3]));
    for (int c = 0; c < NC; c++) single[c] = last_word[c];
    // integration: 4 identical repetitions
    chk(last_word[1].val.i == NREP * single[0].val.i && last_word[1].val.q == NREP * single[0].val.q,
        "integration equals repetition sum");
    // demultiplexing: input 0 (two carriers) vs input 1 (one carrier)
    begin
      longint di, dq, mi, mq;
      real mag;
      di = longint'(single[0].val.i) - longint'(single[2].val.i);
      dq = longint'(single[0].val.q) - longint'(single[2].val.q);
      mi = longint'(single[2].val.i); mq = longint'(single[2].val.q);
      mag = $sqrt(real'(mi * mi + mq * mq));
      $display("sum %0d %0d  mag %f  diff %0d %0d", mi, mq, mag, di, dq);
      chk(di < 64 && di > -64 && dq < 64 && dq > -64, "second carrier rejected");
      chk(mag > 0.98 * 16 * A1 && mag < 1.02 * 16 * A1, "demodulated magnitude");
    end
    // classification
    chk(single[0].is_class && single[0].cls == {single[0].val.q >= 0, single[0].val.i >= 0}, "class bits");
    chk(!single[2].is_class && single[2].cls == 2'b00, "class bypass");
    chk(dly_err == 0 && n_first_adc == n_first_gate && n_first_gate == NREP, "gate markers, delay 0");
    // second execution: capture delay 5 and skew 7
    n_first_adc = 0; n_first_gate = 0;
    run(5, 7, ts);
    chk(ts == 8, $sformatf("start at sched+skew+1 (got %0d)", ts));
    chk(dly_err == 0 && n_first_adc == NREP, "capture delay 5");
    chk(n_start == 2, "two starts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
