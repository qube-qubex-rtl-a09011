// timing_list: host-written table of capture windows. Entry k holds the
// start of window k, in samples from the start of a repetition, and its
// length in samples. The host writes one field per access (wfield = 0:
// start, 1: length). Read is combinational so capture_gate can compare the
// current entry every cycle. All entries clear to zero at reset. The entry
// format and depth are this design's choices; the source names the block.
// wdata[31:24] is unused: the widest field (start) is 24 bits.
module timing_list
  import qube_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic        wfield,
  input  logic [31:0] wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output tl_entry_t   rdata
);
  tl_entry_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) mem[k] <= '0;
    end else if (we) begin
      if (wfield) mem[waddr].len   <= wdata[15:0];
      else        mem[waddr].start <= wdata[23:0];
    end
  end

  assign rdata = mem[raddr];

endmodule
