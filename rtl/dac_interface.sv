// dac_interface: playback sequencer of one transmit channel. On start it
// reads wave_len samples of its waveform memory from address wave_start
// upward, one per clock, and sends them toward the transmit modulator; at
// all other times it sends zeros with active low. A start during playback
// restarts it. Timing: the first sample is out one clock after the edge that samples start
// (the address is issued on that edge, the memory answers on the next; one
// cycle latency seen from start). Playing one contiguous
// range per repetition is this design's choice.
module dac_interface
  import qube_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [$clog2(DEPTH)-1:0] wave_start,
  input  logic [$clog2(DEPTH):0]   wave_len,
  output logic [$clog2(DEPTH)-1:0] mem_raddr,
  input  iq16_t       mem_rdata,
  output iq16_t       dout,
  output logic        dout_active
);
  localparam int AW = $clog2(DEPTH);
  logic [AW:0] left;
  logic        rd, rd_d;

  assign rd = (left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= '0; mem_raddr <= '0; rd_d <= 1'b0;
    end else begin
      rd_d <= rd;
      if (start) begin
        left      <= wave_len;
        mem_raddr <= wave_start;
      end else if (rd) begin
        left      <= left - 1'b1;
        mem_raddr <= mem_raddr + 1'b1;
      end
    end
  end

  assign dout_active = rd_d;
  assign dout        = rd_d ? mem_rdata : '0;

endmodule
