// tb_complex_window: random weights in a 64-entry window memory, random
// windows up to 90 samples (so positions past the depth occur, which must
// be weighted by 0), random gaps; every output (2-cycle latency) is
// compared with an integer model of x[k] * w[k] in Q1.15. Bypass is checked
// too.
// The window depth is reduced to 64 here to keep the run short.
module tb_complex_window;
  import qube_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0, coef_we = 1'b0, bypass = 1'b0;
  logic [5:0] coef_addr;
  logic [31:0] coef_wdata;
  iqs_t din, dout;
  int checks = 0, failures = 0;
  longint wi [DEPTH], wq [DEPTH];
  iqs_t expq [$];

  complex_window #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .coef_we, .coef_addr, .coef_wdata, .bypass, .din, .dout);
  always #5 clk = ~clk;

  function automatic logic signed [15:0] clamp(longint v);
    longint r = (v + 16384) >>> 15;
    if (r > 32767) return 16'sd32767;
    if (r < -32768) return -16'sd32768;
    return 16'(r);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cyc(input iqs_t e);
    iqs_t x;
    din = e;
    expq.push_back(e);
    @(posedge clk); #1;
    if (expq.size() == 2) begin
      x = expq.pop_front();
      checks++;
      if (dout.valid !== x.valid || dout.first !== x.first || dout.last !== x.last ||
          (x.valid && dout.d !== x.d)) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d,%0d exp %0d,%0d", dout.d.i, dout.d.q, x.d.i, x.d.q);
      end
    end
  endtask

  task automatic window(input int len, input bit byp);
    for (int k = 0; k < len; k++) begin
      iqs_t s, e;
      @(negedge clk);
      bypass = byp;
      while ($urandom_range(0, 4) == 0) begin
        cyc('0);
        @(negedge clk);
      end
      s = '0;
      s.valid = 1'b1; s.first = (k == 0); s.last = (k == len - 1);
      s.d.i = 16'($urandom); s.d.q = 16'($urandom);
      e = s;
      if (!byp) begin
        longint ci = (k < DEPTH) ? wi[k] : 0, cq = (k < DEPTH) ? wq[k] : 0;
        e.d.i = clamp(longint'(s.d.i) * ci - longint'(s.d.q) * cq);
        e.d.q = clamp(longint'(s.d.i) * cq + longint'(s.d.q) * ci);
      end
      din = s;
      expq.push_back(e);
      @(posedge clk); #1;
      if (expq.size() == 2) begin
        iqs_t x;
        x = expq.pop_front();
        checks++;
        if (dout.valid !== x.valid || dout.first !== x.first || dout.last !== x.last ||
            (x.valid && dout.d !== x.d)) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d got %0d,%0d exp %0d,%0d", k, dout.d.i, dout.d.q, x.d.i, x.d.q);
        end
      end
    end
  endtask

  initial begin
    din = '0; coef_addr = '0; coef_wdata = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      wi[k] = longint'($urandom_range(0, 65535)) - 32768;
      wq[k] = longint'($urandom_range(0, 65535)) - 32768;
      coef_we = 1'b1; coef_addr = 6'(k); coef_wdata = {16'(wq[k]), 16'(wi[k])};
    end
    @(negedge clk) coef_we = 1'b0;
    for (int w = 0; w < 200; w++) window($urandom_range(1, 90), w % 7 == 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
