// adc_interface: front of the capture path. It takes the demodulated receive
// stream (one sample per clock) and the capture windows produced by
// capture_gate, delays the windows by cap_delay samples so they line up with
// signals returning through the cryostat, and forwards only the samples that
// fall inside a (delayed) window, tagged first/last.
//
// The window markers pass through a resettable shift register of MAX_DELAY
// stages; tap cap_delay is selected (0 = no delay). The output is registered:
// a sample present at the input in cycle t leaves in cycle t+1 marked valid if
// the gate was open in cycle t - cap_delay. The programmable capture delay is
// this design's reading of the "capture delays" setting; the source names
// the block only.
module adc_interface
  import qube_pkg::*;
#(
  parameter int MAX_DELAY = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  iq16_t      din,
  input  logic [$clog2(MAX_DELAY)-1:0] cap_delay,
  input  logic       gate_open,
  input  logic       gate_first,
  input  logic       gate_last,
  output iqs_t       dout
);
  logic [2:0] dl [MAX_DELAY];
  logic [2:0] g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < MAX_DELAY; k++) dl[k] <= '0;
    end else begin
      dl[0] <= {gate_open, gate_first, gate_last};
      for (int k = 1; k < MAX_DELAY; k++) dl[k] <= dl[k-1];
    end
  end

  always_comb begin
    if (cap_delay == '0) g = {gate_open, gate_first, gate_last};
    else                 g = dl[cap_delay - 1'b1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dout <= '0;
    else begin
      dout.valid <= g[2];
      dout.first <= g[2] & g[1];
      dout.last  <= g[2] & g[0];
      dout.d     <= din;
    end
  end

endmodule
