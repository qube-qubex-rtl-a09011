// complex_window: multiplies every sample of a capture window by a complex
// weight chosen by the sample's position in the window. The weights are
// written by the host into a DEPTH-entry memory (coef_wdata =
// {imag[31:16], real[15:0]}, Q1.15); they set the integration window and can
// carry a residual carrier e^{-j w n} so that the following Sum demodulates
// one readout tone.
//
// The position counter restarts at each window's first sample; positions
// beyond DEPTH are weighted by zero. Two pipeline stages: memory read, then
// complex multiply with rounding and saturation. With bypass set samples pass
// unweighted with the same 2-cycle latency. Depth and format are this
// design's choices.
module complex_window
  import qube_pkg::*;
#(
  parameter int DEPTH = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        coef_we,
  input  logic [$clog2(DEPTH)-1:0] coef_addr,
  input  logic [31:0] coef_wdata,
  input  logic        bypass,
  input  iqs_t        din,
  output iqs_t        dout
);
  localparam int AW = $clog2(DEPTH);
  iq16_t       mem [DEPTH];
  logic [15:0] cnt, pos;
  iq16_t       w1;
  iqs_t        s1;
  logic        byp1;

  always_ff @(posedge clk) begin
    if (coef_we) mem[coef_addr] <= {coef_wdata[15:0], coef_wdata[31:16]};
  end

  assign pos = din.first ? '0 : cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; s1 <= '0; w1 <= '0; byp1 <= 1'b0; dout <= '0;
    end else begin
      if (din.valid && pos != 16'hffff) cnt <= pos + 1'b1;
      s1 <= din;
      byp1 <= bypass;
      w1 <= (pos < 16'(DEPTH)) ? mem[pos[AW-1:0]] : '0;
      dout.valid <= s1.valid;
      dout.first <= s1.first;
      dout.last  <= s1.last;
      dout.d     <= byp1 ? s1.d : cmul_q15(s1.d, w1, 1'b0);
    end
  end

endmodule
