// sum_unit: adds all samples of a capture window into one complex value,
// the integrated I/Q of one shot. The accumulator restarts at the window's
// first sample and the total leaves with valid and last set in the cycle
// after the window's last sample. In bypass every sample is forwarded,
// widened to the accumulator width, with the window's last marker. Latency:
// 1 cycle. 48-bit accumulators are this design's choice.
module sum_unit
  import qube_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  bypass,
  input  iqs_t  din,
  output accs_t dout
);
  iqacc_t acc, nxt, w;

  always_comb begin
    w = widen(din.d);
    if (din.first) nxt = w;
    else begin
      nxt.i = acc.i + w.i;
      nxt.q = acc.q + w.q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; dout <= '0;
    end else begin
      if (din.valid) acc <= nxt;
      if (bypass) begin
        dout.valid <= din.valid;
        dout.last  <= din.valid & din.last;
        dout.d     <= w;
      end else begin
        dout.valid <= din.valid & din.last;
        dout.last  <= din.valid & din.last;
        dout.d     <= nxt;
      end
    end
  end

endmodule
