// tb_waveform_memory: fills the whole 4096-sample memory with random
// samples, then reads random and sequential addresses and checks each read
// one cycle later against the written data.
// The depth of 4096 samples is this design's default.
module tb_waveform_memory;
  import qube_pkg::*;
  localparam int DEPTH = 4096;
  logic clk = 1'b0, we = 1'b0;
  logic [11:0] waddr, raddr;
  logic [31:0] wdata;
  iq16_t rdata;
  logic [31:0] img [DEPTH];
  int checks = 0, failures = 0;

  waveform_memory #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 12'(a); wdata = $urandom; img[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      raddr = (n < 3000) ? 12'($urandom) : 12'(n);
      @(posedge clk); #1;
      checks++;
      if (rdata.i !== img[raddr][15:0] || rdata.q !== img[raddr][31:16]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d", raddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
