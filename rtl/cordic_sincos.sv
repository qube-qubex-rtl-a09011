// cordic_sincos: pipelined CORDIC that turns a 32-bit phase (full turn =
// 2^32) into a cosine/sine pair with amplitude 32767.
//
// A phase in the left half-plane is first rotated by pi (start vector
// negated, top phase bit flipped) so the residual angle lies in
// [-pi/2, pi/2), inside the CORDIC convergence range. Each stage then rotates
// by +-atan(2^-k) using shifts and adds. The start magnitude is pre-scaled by
// the CORDIC gain (round(0.607253 * 32767) = 19898) and carried with four
// guard bits, removed by rounding at the output. Latency is STAGES clock
// cycles; one new phase is accepted per clock. Helper of the nco block; the
// use of CORDIC is this design's choice, the source names only an NCO.
module cordic_sincos
  import qube_pkg::*;
#(
  parameter int STAGES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] phase,
  output iq16_t       cs        // i = cos, q = sin
);
  localparam int XW = 22;   // 16 bits + sign growth + 4 guard bits
  localparam logic signed [31:0] ATAN [16] = '{
    32'sd536870912, 32'sd316933406, 32'sd167458907, 32'sd85004756,
    32'sd42667331,  32'sd21354465,  32'sd10679838,  32'sd5340245,
    32'sd2670163,   32'sd1335087,   32'sd667544,    32'sd333772,
    32'sd166886,    32'sd83443,     32'sd41722,     32'sd20861 };
  localparam logic signed [XW-1:0] X0 = XW'(19898 * 16);

  logic signed [XW-1:0] x [STAGES+1];
  logic signed [XW-1:0] y [STAGES+1];
  logic signed [31:0]   z [STAGES+1];

  // Quadrant pre-rotation.
  always_comb begin
    if (phase[31] ^ phase[30]) begin
      x[0] = -X0;
      z[0] = signed'({~phase[31], phase[30:0]});
    end else begin
      x[0] = X0;
      z[0] = signed'(phase);
    end
    y[0] = '0;
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[s+1] <= '0;
        y[s+1] <= '0;
        z[s+1] <= '0;
      end else if (z[s] >= 0) begin
        x[s+1] <= x[s] - (y[s] >>> s);
        y[s+1] <= y[s] + (x[s] >>> s);
        z[s+1] <= z[s] - ATAN[s];
      end else begin
        x[s+1] <= x[s] + (y[s] >>> s);
        y[s+1] <= y[s] - (x[s] >>> s);
        z[s+1] <= z[s] + ATAN[s];
      end
    end
  end

  assign cs.i = sat16((64'(x[STAGES]) + 64'sd8) >>> 4);
  assign cs.q = sat16((64'(y[STAGES]) + 64'sd8) >>> 4);

endmodule
