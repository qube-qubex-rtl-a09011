// tb_exec_scheduler: arms the scheduler with random start times and skews
// against a free-running counter. start must pulse exactly once, on the
// cycle where the counter reads sched_time + skew + 1 (one cycle to compare,
// skew cycles of delay), armed must fall with it, and a start time already
// in the past must fire at once.
// Start at a scheduled counter value follows the source; the skew counter is this design's.
module tb_exec_scheduler;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, arm = 1'b0;
  logic [CNT_W-1:0] sched_time, count;
  logic [7:0] skew;
  logic start, armed;
  int checks = 0, failures = 0;

  exec_scheduler dut (.clk, .rst_n, .arm, .sched_time, .skew, .count, .start, .armed);
  always #5 clk = ~clk;
  always_ff @(posedge clk) count <= count + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    count = 64'hffff_ffff_0000_0000 + 64'($urandom);
    sched_time = '0; skew = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      logic [CNT_W-1:0] exp_at;
      int seen;
      bit past;
      past = (n % 10) == 0;
      @(negedge clk);
      sched_time = past ? count - 64'($urandom_range(1, 50)) : count + 64'($urandom_range(2, 300));
      skew = 8'($urandom);
      arm = 1'b1;
      @(negedge clk) arm = 1'b0;
      exp_at = past ? count + 64'(skew) + 1 : sched_time + 64'(skew) + 1;
      seen = 0;
      while (count <= exp_at + 5) begin
        @(posedge clk); #1;
        if (start) begin
          seen++;
          checks++;
          if (count !== exp_at) begin
            failures++; $display("FAIL n=%0d start at %0d exp %0d", n, count - sched_time, exp_at - sched_time);
          end
          checks++;
          if (armed) begin failures++; $display("FAIL armed after start"); end
        end else if (count < exp_at) begin
          checks++;
          if (!armed) begin failures++; $display("FAIL not armed"); end
        end
      end
      checks++;
      if (seen != 1) begin failures++; $display("FAIL n=%0d starts=%0d", n, seen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
