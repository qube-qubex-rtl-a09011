// tb_decimator: windows of random length (1..14 samples) with random gaps.
// In decimation mode sample k of a window must come out (one cycle later)
// when k % 4 == 3 or k is the window's last sample, the first kept sample
// carrying first and the window's last sample carrying last; in bypass every
// sample comes out. Also counts that 1/4 of a long window's samples remain.
// The factor of four follows the source's 500 to 125 MSa/s; which sample is kept is this design's choice.
module tb_decimator;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, bypass = 1'b0;
  iqs_t din, dout;
  int checks = 0, failures = 0, kept = 0;

  decimator #(.FACTOR(4)) dut (.clk, .rst_n, .bypass, .din, .dout);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic window(input int len, input bit byp);
    bit fp = 1'b1;
    for (int k = 0; k < len; k++) begin
      bit ev, ef, el;
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
      ev = byp || (k % 4 == 3) || (k == len - 1);
      ef = ev && fp;
      el = ev && (k == len - 1);
      if (ev) fp = 1'b0;
      @(posedge clk); #1;
      checks++;
      if (ev) kept++;
      if (dout.valid !== ev || (ev && (dout.first !== ef || dout.last !== el || dout.d !== din.d))) begin
        failures++;
        if (failures < 10) $display("FAIL len=%0d k=%0d got v%b f%b l%b exp v%b f%b l%b", len, k,
                                    dout.valid, dout.first, dout.last, ev, ef, el);
      end
    end
  endtask

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int w = 0; w < 400; w++) window($urandom_range(1, 14), w % 5 == 4);
    kept = 0;
    window(1024, 1'b0);
    checks++;
    if (kept != 256) begin failures++; $display("FAIL kept %0d of 1024", kept); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
