// tb_quad_mixer: random samples and carriers, both conj settings, checked
// against an integer model of the Q1.15 complex product (round half up,
// saturate) with the 2-cycle latency; invalid input samples must give 0.
// Rounding and saturation checked here are this design's choices.
module tb_quad_mixer;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, conj = 1'b0, din_valid = 1'b0;
  iq16_t din, lo, dout;
  logic dout_valid;
  int checks = 0, failures = 0;
  iq16_t expq [$];
  logic  expv [$];

  quad_mixer dut (.clk, .rst_n, .conj, .din, .din_valid, .lo, .dout, .dout_valid);
  always #5 clk = ~clk;

  function automatic logic signed [15:0] clamp(longint v);
    longint r = (v + 16384) >>> 15;
    if (r > 32767) return 16'sd32767;
    if (r < -32768) return -16'sd32768;
    return 16'(r);
  endfunction

  function automatic iq16_t model(iq16_t a, iq16_t b, bit cj, bit v);
    iq16_t r;
    longint bq = cj ? -longint'(b.q) : longint'(b.q);
    if (!v) return '0;
    r.i = clamp(longint'(a.i) * longint'(b.i) - longint'(a.q) * bq);
    r.q = clamp(longint'(a.i) * bq + longint'(a.q) * longint'(b.i));
    return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0; lo = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      din.i = 16'($urandom); din.q = 16'($urandom);
      lo.i  = 16'($urandom); lo.q  = 16'($urandom);
      if (n % 7 == 0) begin din.i = 16'sh8000; lo.i = 16'sh8000; lo.q = 16'sh8000; end
      conj      = n[3];
      din_valid = (n % 5 != 3);
      expq.push_back(model(din, lo, conj, din_valid));
      expv.push_back(din_valid);
      @(posedge clk); #1;
      if (expq.size() == 2) begin
        iq16_t e;
        logic  v;
        e = expq.pop_front();
        v = expv.pop_front();
        checks++;
        if (dout !== e || dout_valid !== v) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d got %0d,%0d exp %0d,%0d", n, dout.i, dout.q, e.i, e.q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
