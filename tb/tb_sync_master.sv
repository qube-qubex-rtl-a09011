// tb_sync_master: one sync master and three unit time counters, each
// released from reset at a different random time, share one reference
// clock. After the master's first sync message has been loaded, every unit
// counter must equal the master counter on every cycle, including after
// more messages. The master must send one message per reference edge from
// the second edge on; a message trails its edge by one clock.
// The reference period is shortened here to 80 clocks; the source's is 4000 (250 MHz / 62.5 kHz).
module tb_sync_master;
  import qube_pkg::*;
  logic clk = 1'b0, rst_m = 1'b0, timing_ref = 1'b0;
  logic [2:0] rst_u = '0;
  logic [CNT_W-1:0] mcount, sync_value;
  logic sync_valid;
  logic [CNT_W-1:0] ucount [3];
  logic [2:0] synced, edge_u;
  int checks = 0, failures = 0, msgs = 0, edges = 0;

  sync_master dut (.clk, .rst_n(rst_m), .timing_ref, .count(mcount), .sync_valid, .sync_value);
  for (genvar u = 0; u < 3; u++) begin : g_u
    time_counter tc (.clk, .rst_n(rst_u[u]), .timing_ref, .sync_valid, .sync_value,
      .count(ucount[u]), .synced(synced[u]), .ref_edge(edge_u[u]));
  end
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #7;
    forever begin
      #400 timing_ref = 1'b1;   // 80 system clocks per reference period
      #400 timing_ref = 1'b0;
    end
  end


  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_m = 1'b1;
    repeat ($urandom_range(5, 60)) @(negedge clk);
    rst_u[0] = 1'b1;
    repeat ($urandom_range(5, 60)) @(negedge clk);
    rst_u[1] = 1'b1;
    repeat ($urandom_range(5, 200)) @(negedge clk);
    rst_u[2] = 1'b1;
    wait (&synced);
    for (int n = 0; n < 20000; n++) begin
      @(posedge clk); #1;
      if (sync_valid) msgs++;
      if (n < 19999 && dut.ref_edge) edges++;
      for (int u = 0; u < 3; u++) begin
        checks++;
        if (ucount[u] !== mcount) begin
          failures++;
          if (failures < 10) $display("FAIL unit %0d count %0d master %0d", u, ucount[u], mcount);
        end
      end
    end
    checks++;
    if (msgs != edges || edges < 200) begin failures++; $display("FAIL msgs=%0d edges=%0d", msgs, edges); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
