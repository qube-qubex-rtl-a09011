// tb_integrator: runs sequences of R repetitions of L values (random data,
// random gaps). With enable set, nothing may leave before the last
// repetition; during it, value k must be the sum of value k over all
// repetitions, in order, with last on the final value. Values beyond the
// 32-entry depth must be counted in overflow and dropped. With enable clear
// each value must pass through unchanged 2 cycles later.
// The depth is reduced to 32 here so that overflow is reached quickly.
module tb_integrator;
  import qube_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, rep_start = 1'b0, first_rep = 1'b0, last_rep = 1'b0;
  accs_t din, dout;
  logic [15:0] overflow;
  int checks = 0, failures = 0, n_out = 0;
  longint ei [$], eq [$];
  bit     el [$];

  integrator #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .enable, .rep_start, .first_rep, .last_rep,
    .din, .dout, .overflow);
  always #5 clk = ~clk;

  // output monitor
  always @(posedge clk) begin
    #1;
    if (rst_n && dout.valid) begin
      checks++;
      n_out++;
      if (ei.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        longint xi, xq;
        bit xl;
        xi = ei.pop_front(); xq = eq.pop_front(); xl = el.pop_front();
        if (longint'(dout.d.i) != xi || longint'(dout.d.q) != xq || dout.last !== xl) begin
          failures++;
          if (failures < 10) $display("FAIL got %0d exp %0d", dout.d.i, xi);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int R, input int L, input bit en);
    longint si [], sq [];
    si = new[L]; sq = new[L];
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      din = '0; enable = en;
      rep_start = 1'b1; first_rep = (r == 0); last_rep = (r == R - 1);
      @(negedge clk) rep_start = 1'b0;
      for (int k = 0; k < L; k++) begin
        while ($urandom_range(0, 3) == 0) begin din = '0; @(negedge clk); end
        din.valid = 1'b1;
        din.last  = (k == L - 1);
        din.d.i = ACC_W'(signed'($urandom));
        din.d.q = ACC_W'(signed'($urandom));
        si[k] = (r == 0 ? 0 : si[k]) + longint'(din.d.i);
        sq[k] = (r == 0 ? 0 : sq[k]) + longint'(din.d.q);
        if (!en) begin
          ei.push_back(longint'(din.d.i)); eq.push_back(longint'(din.d.q)); el.push_back(din.last);
        end else if (r == R - 1 && k < DEPTH) begin
          ei.push_back(si[k]); eq.push_back(sq[k]); el.push_back(din.last);
        end
        @(negedge clk);
        din = '0;
      end
      repeat (4) @(negedge clk);
    end
  endtask

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    run(5, 20, 1'b1);
    run(1, 7, 1'b1);
    run(16, 32, 1'b1);
    run(3, 12, 1'b0);
    checks++;
    if (overflow != 0) begin failures++; $display("FAIL overflow %0d", overflow); end
    run(4, 40, 1'b1);                  // 8 values past the depth per repetition
    repeat (5) @(negedge clk);
    checks++;
    if (overflow != 16'd32) begin failures++; $display("FAIL overflow %0d exp 32", overflow); end
    checks++;
    if (ei.size() != 0) begin failures++; $display("FAIL %0d outputs missing", ei.size()); end
    checks++;
    if (n_out != 20 + 7 + 32 + 36 + 32) begin failures++; $display("FAIL n_out=%0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
