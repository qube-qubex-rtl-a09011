// tb_time_counter: drives a reference clock of random period (40..90 system
// clocks) and random sync values at random times. Every cycle the counter
// must be its previous value plus one, except on the cycle after the first
// detected reference edge that follows a sync message, where it must equal
// that message's value; synced must rise at that load and stay high.
// The reference period is shortened here; the load-at-next-edge rule is this design's choice.
module tb_time_counter;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, timing_ref = 1'b0, sync_valid = 1'b0;
  logic [CNT_W-1:0] sync_value, count, prev;
  logic synced, ref_edge;
  int checks = 0, failures = 0, loads = 0;
  int period;

  time_counter dut (.clk, .rst_n, .timing_ref, .sync_valid, .sync_value, .count, .synced, .ref_edge);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: square wave, period in system clocks, not phase aligned
  initial begin
    period = 64;
    #3;
    forever begin
      #(period * 5) timing_ref = 1'b1;
      #(period * 5) timing_ref = 1'b0;
    end
  end

  // reference model of the load
  logic             m_pend = 1'b0, m_synced = 1'b0;
  logic [CNT_W-1:0] m_val;

  initial begin
    sync_value = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(posedge clk); #1 prev = count;
    for (int n = 0; n < 40000; n++) begin
      bit  e, sv;
      logic [CNT_W-1:0] v;
      e  = ref_edge;             // edge seen by the counter on the next clock
      sv = 1'b0;
      if (($urandom % 700) == 0) begin
        sv = 1'b1; v = {$urandom, $urandom};
        sync_valid = 1'b1; sync_value = v;
      end
      if ((n % 5000) == 4999) period = $urandom_range(40, 90);
      @(posedge clk); #1;
      sync_valid = 1'b0;
      checks++;
      if (e && m_pend) begin
        loads++;
        m_synced = 1'b1;
        m_pend   = 1'b0;
        if (count !== m_val) begin failures++; $display("FAIL load %h exp %h", count, m_val); end
      end else if (count !== prev + 1) begin
        failures++; $display("FAIL step %h -> %h", prev, count);
      end
      if (sv) begin m_pend = 1'b1; m_val = v; end
      checks++;
      if (synced !== m_synced) begin failures++; $display("FAIL synced"); end
      prev = count;
    end
    checks++;
    if (loads < 20) begin failures++; $display("FAIL too few loads %0d", loads); end
    $display("loads=%0d", loads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
