// decimator: 1/4 decimation of the capture stream (500 MSa/s to 125 MSa/s).
//
// Inside each capture window the samples are counted in groups of FACTOR,
// starting at the window's first sample; the last sample of each group is
// kept. If a window ends in a partial group, its final sample is kept too, so
// every window yields ceil(len/FACTOR) samples and keeps its last marker.
// The first output of a window carries the first marker. With bypass set
// every sample is kept. Latency: 1 cycle. The factor 4 is the source's; which
// sample of a group is kept is this design's choice.
module decimator
  import qube_pkg::*;
#(
  parameter int FACTOR = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic bypass,
  input  iqs_t din,
  output iqs_t dout
);
  localparam int PW = $clog2(FACTOR);
  logic [PW-1:0] cnt, ph;
  logic          first_pend, keep, fp;

  always_comb begin
    ph   = din.first ? '0 : cnt;
    fp   = din.first | first_pend;
    keep = din.valid & (bypass | (ph == PW'(FACTOR-1)) | din.last);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; first_pend <= 1'b0; dout <= '0;
    end else begin
      if (din.valid) begin
        cnt        <= (ph == PW'(FACTOR-1)) ? '0 : ph + 1'b1;
        first_pend <= fp & ~keep;
      end
      dout.valid <= keep;
      dout.first <= keep & fp;
      dout.last  <= keep & din.last;
      dout.d     <= din.d;
    end
  end

endmodule
