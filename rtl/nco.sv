// nco: numerically controlled oscillator supplying the carrier of a
// quadrature modulator or demodulator.
//
// A 32-bit phase accumulator advances by freq_word every sample
// (f = freq_word / 2^32 * fs). phase_clear restarts the phase at zero, which
// is done at every execution start so the carrier phase is the same at every
// scheduled start. A carrier on the 23.4375 MHz grid used by the unit
// (3/64 of 500 MSa/s) also returns to the same phase every 64 samples
// (128 ns). The phase is converted to cos/sin by a 16-stage CORDIC.
// Timing: lo follows the accumulator by 16 cycles; the phase after a
// phase_clear cycle is 0. The source names the block only; accumulator width
// and the CORDIC are this design's choices.
module nco
  import qube_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] freq_word,
  input  logic        phase_clear,
  output iq16_t       lo
);
  logic [31:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           phase <= '0;
    else if (phase_clear) phase <= '0;
    else                  phase <= phase + freq_word;
  end

  cordic_sincos #(.STAGES(16)) u_cordic (
    .clk   (clk),
    .rst_n (rst_n),
    .phase (phase),
    .cs    (lo)
  );

endmodule
