// tb_nco: checks the NCO against a floating-point model. After a
// phase_clear the output j cycles later must be 32767*(cos, sin) of
// (j-16)*freq_word*2*pi/2^32 within 6 LSB (16-cycle CORDIC latency). It also
// checks that a carrier on the 23.4375 MHz grid (3/64 of the sample rate)
// repeats exactly every 64 samples.
// The 23.4375 MHz grid word is the source's; the tolerance reflects this design's CORDIC.
module tb_nco;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, phase_clear = 1'b0;
  logic [31:0] freq_word;
  iq16_t lo;
  int checks = 0, failures = 0;
  iq16_t hist [0:511];

  nco dut (.clk, .rst_n, .freq_word, .phase_clear, .lo);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic run(input logic [31:0] fw, input int n);
    real th, ec, es;
    freq_word = fw;
    @(negedge clk) phase_clear = 1'b1;
    @(negedge clk) phase_clear = 1'b0;   // phase_clear sampled at one edge
    for (int j = 1; j < n; j++) begin
      @(posedge clk); #1;
      hist[j] = lo;
      if (j >= 16) begin
        th = 2.0 * 3.14159265358979 * real'(longint'(fw) * longint'(j - 16) % 64'sd4294967296) / 4294967296.0;
        ec = 32767.0 * $cos(th);
        es = 32767.0 * $sin(th);
        chk((real'(lo.i) - ec) < 6.0 && (ec - real'(lo.i)) < 6.0, $sformatf("cos j=%0d got %0d exp %f", j, lo.i, ec));
        chk((real'(lo.q) - es) < 6.0 && (es - real'(lo.q)) < 6.0, $sformatf("sin j=%0d got %0d exp %f", j, lo.q, es));
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    freq_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // 23.4375 MHz at 500 MSa/s = 3/64 turn per sample
    run(32'd201326592, 200);
    for (int j = 16; j < 135; j++) chk(hist[j] == hist[j+64], $sformatf("64-sample period j=%0d", j));
    run(32'h1234_5678, 300);
    run(32'hF000_0001, 300);   // negative frequency
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
