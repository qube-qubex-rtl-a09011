// complex_fir: complex FIR filter of a capture unit. Each capture unit gives
// its filter a band-pass around one readout carrier, which is how the shared
// receive stream is split ("demultiplexed") into up to four carriers.
//
// y[n] = sum_k c[k] * x[n-k], complex, coefficients signed Q1.15 written by
// the host (coef_wdata = {imag[31:16], real[15:0]}). The delay line advances
// only on valid samples and keeps its history across capture windows. After
// reset the taps form a unit impulse (c[0] = 32767), so the filter passes the
// signal. With bypass set the sample is forwarded unchanged. Latency: 1 cycle
// for data and markers. Tap count and formats are this design's choices.
module complex_fir
  import qube_pkg::*;
#(
  parameter int TAPS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        coef_we,
  input  logic [$clog2(TAPS)-1:0] coef_addr,
  input  logic [31:0] coef_wdata,
  input  logic        bypass,
  input  iqs_t        din,
  output iqs_t        dout
);
  iq16_t coef [TAPS];
  iq16_t hist [TAPS-1];
  iq16_t x    [TAPS];
  iq16_t y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) coef[k] <= '0;
      coef[0].i <= 16'sh7fff;
    end else if (coef_we) begin
      coef[coef_addr] <= {coef_wdata[15:0], coef_wdata[31:16]};
    end
  end

  always_comb begin
    x[0] = din.d;
    for (int k = 1; k < TAPS; k++) x[k] = hist[k-1];
  end

  always_comb begin
    logic signed [63:0] re, im;
    re = '0; im = '0;
    for (int k = 0; k < TAPS; k++) begin
      re += 64'(x[k].i) * 64'(coef[k].i) - 64'(x[k].q) * 64'(coef[k].q);
      im += 64'(x[k].i) * 64'(coef[k].q) + 64'(x[k].q) * 64'(coef[k].i);
    end
    y.i = rnd_q15(re);
    y.q = rnd_q15(im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS-1; k++) hist[k] <= '0;
      dout <= '0;
    end else begin
      if (din.valid) begin
        hist[0] <= din.d;
        for (int k = 1; k < TAPS-1; k++) hist[k] <= hist[k-1];
      end
      dout.valid <= din.valid;
      dout.first <= din.first;
      dout.last  <= din.last;
      dout.d     <= bypass ? din.d : y;
    end
  end

endmodule
