// tb_capture_unit: drives repetitions of gated sample windows into one
// capture unit under 40 random configurations (every bypass combination,
// integration on/off, random FIR taps, window weights and threshold lines)
// and compares every output word, in order, with a behavioural model of
// the chain: FIR over all valid samples, keep every 4th sample of a window
// and its last one, weight by position, sum per window, accumulate
// per-window results over repetitions (output only in the last one when
// integrating) and classify against two lines a*I + b*Q >= c.
// The stage order is the source's; the model's arithmetic mirrors this design's fixed-point choices.
module tb_capture_unit;
  import qube_pkg::*;
  localparam int TAPS = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  cap_cfg_t cfg;
  logic fir_we = 1'b0, win_we = 1'b0, rep_start = 1'b0, first_rep = 1'b0, last_rep = 1'b0;
  logic [11:0] coef_addr;
  logic [31:0] coef_wdata;
  iqs_t din;
  cap_word_t dout;
  logic dout_valid, dout_last;
  logic [15:0] int_overflow;
  int checks = 0, failures = 0, n_out = 0, n_cls [4];

  capture_unit dut (.clk, .rst_n, .cfg, .fir_we, .win_we, .coef_addr, .coef_wdata, .rep_start,
    .first_rep, .last_rep, .din, .dout, .dout_valid, .dout_last, .int_overflow);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  iq16_t fc [TAPS];
  iq16_t wc [64];
  iq16_t hx [TAPS];          // hx[0] newest valid sample
  cap_word_t exp_q [$];
  bit        exp_l [$];

  cap_word_t got_q [$];
  bit        got_l [$];
  always @(posedge clk) begin
    #1;
    if (dout_valid) begin
      n_out++;
      got_q.push_back(dout);
      got_l.push_back(dout_last);
    end
  end

  task automatic compare();
    checks++;
    if (got_q.size() != exp_q.size()) begin
      failures++; $display("FAIL %0d outputs, expected %0d", got_q.size(), exp_q.size());
    end
    while (got_q.size() != 0 && exp_q.size() != 0) begin
      cap_word_t g, e;
      bit gl, el;
      g = got_q.pop_front(); gl = got_l.pop_front();
      e = exp_q.pop_front(); el = exp_l.pop_front();
      checks++;
      if (g !== e || gl !== el) begin
        failures++;
        if (failures < 10) $display("FAIL got %h/%h cls %b last %b exp %h/%h cls %b last %b",
          g.val.i, g.val.q, g.cls, gl, e.val.i, e.val.q, e.cls, el);
      end
      if (e.is_class) n_cls[e.cls]++;
    end
    got_q.delete(); got_l.delete(); exp_q.delete(); exp_l.delete();
  endtask

  function automatic iq16_t fir_step(input iq16_t x);
    logic signed [63:0] re, im;
    for (int k = TAPS - 1; k > 0; k--) hx[k] = hx[k-1];
    hx[0] = x;
    re = '0; im = '0;
    for (int k = 0; k < TAPS; k++) begin
      re += 64'(hx[k].i) * 64'(fc[k].i) - 64'(hx[k].q) * 64'(fc[k].q);
      im += 64'(hx[k].i) * 64'(fc[k].q) + 64'(hx[k].q) * 64'(fc[k].i);
    end
    fir_step.i = rnd_q15(re);
    fir_step.q = rnd_q15(im);
  endfunction

  function automatic cap_word_t classify(input iqacc_t v);
    cap_word_t w;
    w.is_class = ~cfg.cls_bypass;
    w.val = v;
    w.cls = '0;
    if (!cfg.cls_bypass)
      for (int k = 0; k < 2; k++) begin
        logic signed [79:0] s;
        s = 80'(cfg.thr[k].a) * 80'(v.i) + 80'(cfg.thr[k].b) * 80'(v.q);
        w.cls[k] = (s >= 80'(cfg.thr[k].c));
      end
    return w;
  endfunction

  task automatic wr(input bit win, input int a, input logic [31:0] d);
    @(negedge clk);
    coef_addr = 12'(a); coef_wdata = d;
    if (win) win_we = 1'b1; else fir_we = 1'b1;
    @(negedge clk);
    win_we = 1'b0; fir_we = 1'b0;
  endtask

  initial begin
    din = '0; cfg = '0; coef_addr = '0; coef_wdata = '0;
    for (int k = 0; k < 4; k++) n_cls[k] = 0;
    for (int k = 0; k < TAPS; k++) begin fc[k] = '0; hx[k] = '0; end
    fc[0].i = 16'sh7fff;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      int nr, nw;
      int wl [4];
      iqacc_t acc [64];
      // configuration
      cfg = '0;
      {cfg.integrate, cfg.cls_bypass, cfg.sum_bypass, cfg.win_bypass, cfg.dec_bypass,
       cfg.fir_bypass} = (n < 32) ? 6'(n * 2 + (n % 2)) : 6'($urandom);
      for (int k = 0; k < 2; k++) begin
        cfg.thr[k].a = 16'($urandom_range(0, 65535));
        cfg.thr[k].b = 16'($urandom_range(0, 65535));
        cfg.thr[k].c = 64'($signed(32'($urandom)) >>> 4);
      end
      if (n % 4 == 1) begin
        for (int k = 0; k < TAPS; k++) begin
          fc[k].i = 16'($signed($urandom_range(0, 8191)) - 4096);
          fc[k].q = 16'($signed($urandom_range(0, 8191)) - 4096);
          wr(1'b0, k, {fc[k].q, fc[k].i});
        end
      end
      if (n % 4 == 0)
        for (int k = 0; k < 64; k++) begin
          wc[k].i = 16'($urandom);
          wc[k].q = 16'($urandom);
          wr(1'b1, k, {wc[k].q, wc[k].i});
        end
      nr = $urandom_range(1, 4);
      nw = $urandom_range(1, 4);
      for (int w = 0; w < nw; w++) wl[w] = $urandom_range(1, 40);
      for (int r = 0; r < nr; r++) begin
        int ix;
        ix = 0;
        @(negedge clk);
        rep_start = 1'b1; first_rep = (r == 0); last_rep = (r == nr - 1);
        @(negedge clk) rep_start = 1'b0;
        for (int w = 0; w < nw; w++) begin
          iq16_t ds [$];
          iqacc_t ss [$];
          iqacc_t s;
          ds.delete();
          ss.delete();
          repeat ($urandom_range(1, 6)) @(negedge clk);
          // drive the window and build the decimated / weighted stream
          for (int j = 0; j < wl[w]; j++) begin
            iq16_t x, y;
            x.i = 16'($urandom); x.q = 16'($urandom);
            din.valid = 1'b1; din.first = (j == 0); din.last = (j == wl[w] - 1); din.d = x;
            y = fir_step(x);
            if (cfg.fir_bypass) y = x;
            if (cfg.dec_bypass || j % 4 == 3 || j == wl[w] - 1) ds.push_back(y);
            @(negedge clk);
            din = '0;
            if ($urandom_range(0, 3) == 0) @(negedge clk);   // gaps inside a window
          end
          s = '0;
          for (int p = 0; p < ds.size(); p++) begin
            iq16_t z;
            z = cfg.win_bypass ? ds[p] : cmul_q15(ds[p], wc[p], 1'b0);
            if (cfg.sum_bypass) ss.push_back(widen(z));
            else begin s.i += ACC_W'(z.i); s.q += ACC_W'(z.q); end
          end
          if (!cfg.sum_bypass) ss.push_back(s);
          for (int p = 0; p < ss.size(); p++) begin
            iqacc_t v;
            v = ss[p];
            if (cfg.integrate) begin
              if (r != 0) begin v.i += acc[ix].i; v.q += acc[ix].q; end
              acc[ix] = v;
            end
            ix++;
            if (!cfg.integrate || r == nr - 1) begin
              exp_q.push_back(classify(v));
              exp_l.push_back(p == ss.size() - 1);
            end
          end
        end
        repeat (12) @(negedge clk);
      end
      repeat (10) @(negedge clk);
      compare();
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (n_cls[k] == 0) begin failures++; $display("FAIL category %0d never produced", k); end
    end
    $display("outputs=%0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
