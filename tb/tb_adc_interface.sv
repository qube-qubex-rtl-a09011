// tb_adc_interface: random capture windows and samples for capture delays
// 0, 1, 7 and 255. In each cycle the output must carry the sample present at
// the input in that cycle, marked valid/first/last exactly when the gate
// markers were set cap_delay cycles earlier.
// The capture-delay range follows this design's 8-bit setting; the source gives no delay range.
module tb_adc_interface;
  import qube_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  iq16_t din;
  logic [7:0] cap_delay;
  logic gate_open, gate_first, gate_last;
  iqs_t dout;
  int checks = 0, failures = 0;
  logic [2:0] g [0:4095];
  iq16_t      dh [0:4095];

  adc_interface #(.MAX_DELAY(256)) dut (.clk, .rst_n, .din, .cap_delay, .gate_open,
    .gate_first, .gate_last, .dout);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dl [4] = '{0, 1, 7, 255};
    din = '0; {gate_open, gate_first, gate_last} = '0; cap_delay = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    foreach (dl[m]) begin
      cap_delay = 8'(dl[m]);
      for (int n = 0; n < 1000; n++) begin
        logic [2:0] e;
        @(negedge clk);
        din.i = 16'($urandom); din.q = 16'($urandom);
        if (n < 300 || n > 700) g[n] = '0;
        else begin
          g[n][2] = $urandom_range(0, 2) != 0;
          g[n][1] = g[n][2] & $urandom_range(0, 1);
          g[n][0] = g[n][2] & $urandom_range(0, 1);
        end
        {gate_open, gate_first, gate_last} = g[n];
        dh[n] = din;
        @(posedge clk); #1;
        e = (n - dl[m] >= 0) ? g[n - dl[m]] : 3'b000;
        checks++;
        if (dout.valid !== e[2] || dout.first !== e[1] || dout.last !== e[0] || dout.d !== dh[n]) begin
          failures++;
          if (failures < 10) $display("FAIL delay=%0d n=%0d got %b%b%b exp %b", dl[m], n,
                                      dout.valid, dout.first, dout.last, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
