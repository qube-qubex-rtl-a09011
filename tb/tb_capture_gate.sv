// tb_capture_gate: random sequences (1..6 repetitions, period 60..400
// clocks, 0..16 timing-list sections of ascending, non-overlapping windows,
// some of zero length) are started and every output is compared each clock
// with a reference model: repetition t = 0 pulses awg_start and rep_start
// with first_rep/last_rep, the gate is open exactly on [start, start + len)
// of each enabled section with first/last markers on its ends, and done
// pulses (and busy falls) together with the outputs of the last clock of
// the last repetition.
// Repetition and window semantics checked here are this design's reading of the source's timing list.
module tb_capture_gate;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [15:0] n_reps;
  logic [23:0] rep_period;
  logic [4:0]  n_sections;
  logic [3:0]  tl_raddr;
  tl_entry_t   tl [16];
  tl_entry_t   tl_entry;
  logic awg_start, rep_start, first_rep, last_rep, gate_open, gate_first, gate_last, busy, done;
  int checks = 0, failures = 0, windows = 0;

  capture_gate #(.TL_DEPTH(16)) dut (.clk, .rst_n, .start, .n_reps, .rep_period, .n_sections,
    .tl_raddr, .tl_entry, .awg_start, .rep_start, .first_rep, .last_rep, .gate_open,
    .gate_first, .gate_last, .busy, .done);
  assign tl_entry = tl[tl_raddr];
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    n_reps = '0; rep_period = '0; n_sections = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 120; n++) begin
      int per, nr, ns, pos;
      bit exp_open [];
      bit exp_first [];
      bit exp_last [];
      per = $urandom_range(60, 400);
      nr  = $urandom_range(1, 6);
      ns  = $urandom_range(0, 16);
      pos = $urandom_range(0, 20);
      exp_open  = new[per];
      exp_first = new[per];
      exp_last  = new[per];
      for (int k = 0; k < 16; k++) begin
        int len;
        len = (pos < per - 2 && ($urandom % 8) != 0) ? $urandom_range(1, (per - pos) / 3 + 1) : 0;
        if (pos + len > per) len = per - pos;
        tl[k].start = 24'(pos);
        tl[k].len   = 16'(len);
        if (k < ns) begin
          for (int t = pos; t < pos + len; t++) exp_open[t] = 1'b1;
          if (len > 0) begin exp_first[pos] = 1'b1; exp_last[pos + len - 1] = 1'b1; end
        end
        pos = pos + len + $urandom_range(0, 8) + (len == 0 ? 1 : 0);
        if (pos >= per) pos = per + 1000;   // later entries never match
      end
      @(negedge clk);
      start = 1'b1; n_reps = 16'(nr); rep_period = 24'(per); n_sections = 5'(ns);
      @(negedge clk) start = 1'b0;
      for (int r = 0; r < nr; r++) begin
        for (int t = 0; t < per; t++) begin
          bit fin;
          @(posedge clk); #1;
          fin = (r == nr - 1) && (t == per - 1);
          chk(busy === !fin, $sformatf("busy n=%0d r=%0d t=%0d", n, r, t));
          chk(rep_start === (t == 0) && awg_start === (t == 0), "rep_start");
          if (t == 0) chk(first_rep === (r == 0) && last_rep === (r == nr - 1), "first/last rep");
          chk(gate_open === exp_open[t], $sformatf("gate n=%0d r=%0d t=%0d", n, r, t));
          chk(gate_first === exp_first[t] && gate_last === exp_last[t], "markers");
          chk(done === fin, "done");
          if (gate_first) windows++;
        end
      end
      repeat ($urandom_range(0, 3)) begin
        @(posedge clk); #1;
        chk(done === 1'b0 && gate_open === 1'b0 && rep_start === 1'b0, "idle");
      end
    end
    chk(windows > 300, "enough windows");
    $display("windows=%0d", windows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
