// tb_timing_list: random field writes to random entries, each followed by a
// comparison of every entry with a reference copy; entries must be zero
// after reset and only the addressed field may change.
// Entry format and depth are this design's choices.
module tb_timing_list;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0, wfield = 1'b0;
  logic [3:0] waddr, raddr;
  logic [31:0] wdata;
  tl_entry_t rdata;
  tl_entry_t ref_tl [16];
  int checks = 0, failures = 0;

  timing_list #(.DEPTH(16)) dut (.clk, .rst_n, .we, .waddr, .wfield, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int k = 0; k < 16; k++) begin
      raddr = 4'(k);
      #1;
      checks++;
      if (rdata !== ref_tl[k]) begin failures++; $display("FAIL entry %0d", k); end
    end
  endtask

  initial begin
    waddr = '0; raddr = '0; wdata = '0;
    for (int k = 0; k < 16; k++) ref_tl[k] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check_all();
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we = 1'b1; waddr = 4'($urandom); wfield = 1'($urandom); wdata = $urandom;
      if (wfield) ref_tl[waddr].len = wdata[15:0]; else ref_tl[waddr].start = wdata[23:0];
      @(negedge clk) we = 1'b0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
