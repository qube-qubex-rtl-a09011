// tb_classifier: random threshold lines and random I/Q values (including
// points exactly on a line); each output, one cycle later, must carry the
// category {a1 I + b1 Q >= c1, a0 I + b0 Q >= c0}, or the value itself with
// is_class = 0 in bypass. All four categories must occur.
// Two lines giving four categories follow the source's 'up to four categories'; the line form is this design's.
module tb_classifier;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, bypass = 1'b0;
  thr_line_t [1:0] thr;
  accs_t din;
  cap_word_t dout;
  logic dout_valid, dout_last;
  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  classifier dut (.clk, .rst_n, .bypass, .thr, .din, .dout, .dout_valid, .dout_last);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0; thr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      logic [1:0] e;
      longint I, Q;
      @(negedge clk);
      if (n % 100 == 0) begin
        for (int k = 0; k < 2; k++) begin
          thr[k].a = 16'($urandom);
          thr[k].b = 16'($urandom);
          thr[k].c = 64'(signed'($urandom)) <<< 8;
        end
      end
      bypass = (n % 10 == 9);
      I = longint'(signed'($urandom)) <<< ($urandom_range(0, 8));
      Q = longint'(signed'($urandom)) <<< ($urandom_range(0, 8));
      if (n % 13 == 0 && thr[0].a == 16'sd1) Q = 0;
      if (n % 11 == 0) begin   // exactly on line 0: a0 = 1, b0 = 0
        thr[0].a = 16'sd1; thr[0].b = 16'sd0; I = longint'(thr[0].c);
      end
      din.valid = 1'b1; din.last = n[0];
      din.d.i = ACC_W'(I); din.d.q = ACC_W'(Q);
      for (int k = 0; k < 2; k++)
        e[k] = (longint'(thr[k].a) * I + longint'(thr[k].b) * Q) >= longint'(thr[k].c);
      @(posedge clk); #1;
      checks++;
      if (!bypass) seen[e]++;
      if (dout_valid !== 1'b1 || dout_last !== n[0] || dout.is_class !== !bypass ||
          (!bypass && dout.cls !== e) || longint'(dout.val.i) != I || longint'(dout.val.q) != Q) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d got %0d exp %0d", n, dout.cls, e);
      end
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("FAIL category %0d never seen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
