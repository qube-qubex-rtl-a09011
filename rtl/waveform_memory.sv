// waveform_memory: sample memory of one transmit channel. The host writes
// complex samples (wdata = {Q[31:16], I[15:0]}); the playback sequencer reads
// one sample per clock with one cycle of latency. The depth is this design's
// choice.
module waveform_memory
  import qube_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic        clk,
  input  logic        we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [31:0] wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output iq16_t       rdata
);
  iq16_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= {wdata[15:0], wdata[31:16]};
    rdata <= mem[raddr];
  end

endmodule
