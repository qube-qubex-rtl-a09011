// tb_sum_unit: random windows; in sum mode exactly one output per window,
// one cycle after its last sample, equal to the complex sum of the window;
// nothing otherwise. In bypass every sample comes out widened.
// Accumulator width is this design's choice.
module tb_sum_unit;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, bypass = 1'b0;
  iqs_t din;
  accs_t dout;
  int checks = 0, failures = 0;

  sum_unit dut (.clk, .rst_n, .bypass, .din, .dout);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic window(input int len, input bit byp);
    longint si = 0, sq = 0;
    for (int k = 0; k < len; k++) begin
      bit ev;
      do begin
        @(negedge clk);
        bypass = byp;
        din = '0;
        din.valid = ($urandom_range(0, 4) != 0);
        if (!din.valid) begin @(posedge clk); #1; checks++; if (dout.valid) failures++; end
      end while (!din.valid);
      din.first = (k == 0);
      din.last  = (k == len - 1);
      din.d.i = 16'($urandom); din.d.q = 16'($urandom);
      si += longint'(din.d.i); sq += longint'(din.d.q);
      ev = byp || (k == len - 1);
      @(posedge clk); #1;
      checks++;
      if (dout.valid !== ev || dout.last !== (k == len - 1) ||
          (ev && !byp && (longint'(dout.d.i) != si || longint'(dout.d.q) != sq)) ||
          (ev && byp && (longint'(dout.d.i) != longint'(din.d.i) || longint'(dout.d.q) != longint'(din.d.q)))) begin
        failures++;
        if (failures < 10) $display("FAIL len=%0d k=%0d valid=%b", len, k, dout.valid);
      end
    end
  endtask

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int w = 0; w < 300; w++) window($urandom_range(1, 40), w % 6 == 5);
    window(20000, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
