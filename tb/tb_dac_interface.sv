// tb_dac_interface: a behavioural memory returns a known pattern
// (sample = address * 3 + 1). For random ranges, the samples of
// [wave_start, wave_start + wave_len) must appear on consecutive cycles
// starting on the clock edge after the one that samples start, with active high for exactly
// wave_len cycles and zeros otherwise; a start during playback restarts it.
// The one-range-per-repetition playback is this design's choice.
module tb_dac_interface;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [11:0] wave_start, mem_raddr;
  logic [12:0] wave_len;
  iq16_t mem_rdata, dout;
  logic dout_active;
  int checks = 0, failures = 0;

  dac_interface #(.DEPTH(4096)) dut (.clk, .rst_n, .start, .wave_start, .wave_len, .mem_raddr,
    .mem_rdata, .dout, .dout_active);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    mem_rdata.i <= 16'(mem_raddr * 3 + 1);
    mem_rdata.q <= ~{4'b0, mem_raddr};
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic play(input int st, input int len, input int watch);
    @(negedge clk);
    start = 1'b1; wave_start = 12'(st); wave_len = 13'(len);
    @(negedge clk) start = 1'b0;
    // cycle after the start edge is offset 1
    for (int t = 1; t <= watch; t++) begin
      int a;
      bit ea;
      @(posedge clk); #1;
      ea = (t >= 1) && (t < 1 + len);
      a  = (st + t - 1) % 4096;
      checks++;
      if (dout_active !== ea || (ea && (dout.i !== 16'(a * 3 + 1) || dout.q !== ~16'(a))) ||
          (!ea && dout !== '0)) begin
        failures++;
        if (failures < 10) $display("FAIL st=%0d len=%0d t=%0d act=%b i=%h q=%h a=%0d", st, len, t, dout_active, dout.i, dout.q, a);
      end
    end
  endtask

  initial begin
    wave_start = '0; wave_len = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 60; n++) begin
      int l = $urandom_range(0, 200);
      play($urandom_range(0, 4095), l, l + 6);
    end
    play(100, 4096, 4100);
    play(5, 50, 20);                   // restarted below before it ends
    play(7, 10, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
