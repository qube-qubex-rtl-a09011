// quad_mixer: quadrature (de)modulator. Multiplies a complex sample stream by
// the NCO carrier lo (conj = 0, transmit modulation) or by its conjugate
// (conj = 1, receive demodulation), in Q1.15 with rounding and saturation to
// 16 bits.
//
// Two pipeline stages: the carrier and sample are registered, then the
// complex product is formed and registered. dout_valid follows din_valid by
// 2 cycles. Samples with din_valid low are mixed as zeros so the output is 0
// between pulses. The source shows the block ("Quadrature Modulation") on
// both the receive and transmit side; the arithmetic format is this design's.
module quad_mixer
  import qube_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  conj,
  input  iq16_t din,
  input  logic  din_valid,
  input  iq16_t lo,
  output iq16_t dout,
  output logic  dout_valid
);
  iq16_t d1, lo1;
  logic  v1, c1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1 <= '0; lo1 <= '0; v1 <= 1'b0; c1 <= 1'b0;
      dout <= '0; dout_valid <= 1'b0;
    end else begin
      d1  <= din_valid ? din : '0;
      lo1 <= lo;
      v1  <= din_valid;
      c1  <= conj;
      dout       <= cmul_q15(d1, lo1, c1);
      dout_valid <= v1;
    end
  end

endmodule
