// tb_complex_fir: loads random complex taps, streams random samples with
// gaps, and compares every output (1-cycle latency) with a direct-form
// integer model of sum_k c[k] x[n-k] (Q1.15, round half up, saturate). Also
// checks bypass, the reset impulse response and that markers pass through.
// The tap count and Q1.15 rounding are this design's choices.
module tb_complex_fir;
  import qube_pkg::*;
  localparam int TAPS = 16;
  logic clk = 1'b0, rst_n = 1'b0, coef_we = 1'b0, bypass = 1'b0;
  logic [3:0] coef_addr;
  logic [31:0] coef_wdata;
  iqs_t din, dout;
  int checks = 0, failures = 0;
  longint ci [TAPS], cq [TAPS];
  longint xi [$], xq [$];

  complex_fir #(.TAPS(TAPS)) dut (.clk, .rst_n, .coef_we, .coef_addr, .coef_wdata, .bypass, .din, .dout);
  always #5 clk = ~clk;

  function automatic logic signed [15:0] clamp(longint v);
    longint r = (v + 16384) >>> 15;
    if (r > 32767) return 16'sd32767;
    if (r < -32768) return -16'sd32768;
    return 16'(r);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stream(input int n, input bit byp, input int amp);
    for (int s = 0; s < n; s++) begin
      longint re, im;
      logic signed [15:0] ei, eq;
      @(negedge clk);
      bypass    = byp;
      din.valid = ($urandom_range(0, 3) != 0);
      din.first = din.valid & (s % 37 == 0);
      din.last  = din.valid & (s % 37 == 36);
      din.d.i   = 16'($urandom_range(0, 2*amp) - amp);
      din.d.q   = 16'($urandom_range(0, 2*amp) - amp);
      re = 0; im = 0;
      if (din.valid) begin
        xi.push_front(longint'(din.d.i)); xq.push_front(longint'(din.d.q));
        void'(xi.pop_back()); void'(xq.pop_back());
      end
      for (int k = 0; k < TAPS; k++) begin
        longint a, b;
        a = (k == 0) ? longint'(din.d.i) : xi[k - (din.valid ? 0 : 1)];
        b = (k == 0) ? longint'(din.d.q) : xq[k - (din.valid ? 0 : 1)];
        re += a * ci[k] - b * cq[k];
        im += a * cq[k] + b * ci[k];
      end
      ei = byp ? din.d.i : clamp(re);
      eq = byp ? din.d.q : clamp(im);
      @(posedge clk); #1;
      checks++;
      if (dout.valid !== din.valid || dout.first !== din.first || dout.last !== din.last ||
          (din.valid && (dout.d.i !== ei || dout.d.q !== eq))) begin
        failures++;
        if (failures < 10) $display("FAIL s=%0d got %0d,%0d exp %0d,%0d", s, dout.d.i, dout.d.q, ei, eq);
      end
    end
    @(negedge clk) din = '0;
    @(posedge clk);
  endtask

  initial begin
    din = '0; coef_addr = '0; coef_wdata = '0;
    for (int k = 0; k < TAPS; k++) begin ci[k] = (k == 0) ? 32767 : 0; cq[k] = 0; end
    for (int k = 0; k < TAPS + 1; k++) begin xi.push_back(0); xq.push_back(0); end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    stream(100, 1'b0, 30000);          // reset taps: unit impulse
    for (int k = 0; k < TAPS; k++) begin
      @(negedge clk);
      ci[k] = longint'($urandom_range(0, 16000)) - 8000;
      cq[k] = longint'($urandom_range(0, 16000)) - 8000;
      coef_we = 1'b1; coef_addr = 4'(k);
      coef_wdata = {16'(cq[k]), 16'(ci[k])};
    end
    @(negedge clk) coef_we = 1'b0;
    stream(1500, 1'b0, 4000);
    stream(300, 1'b0, 32767);          // saturating
    stream(200, 1'b1, 32767);
    stream(200, 1'b0, 4000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
