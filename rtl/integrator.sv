// integrator: accumulates the values of every repetition (shot) element by
// element and emits the accumulated values during the last repetition, which
// averages a trace or a set of integrated values over the shots on the FPGA.
//
// The element address restarts at rep_start. Each valid input reads the
// stored element, adds the input (or stores the input alone in the first
// repetition) and writes it back. During the last repetition the new sums
// also leave on dout. Elements beyond DEPTH are dropped and counted in
// overflow. Latency: 2 cycles (memory read, add and write). Inputs of one
// repetition must all arrive before the next rep_start. When disabled
// (enable = 0) the input is forwarded with the same latency. The depth and
// wrap-around arithmetic are this design's choices.
module integrator
  import qube_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        rep_start,
  input  logic        first_rep,
  input  logic        last_rep,
  input  accs_t       din,
  output accs_t       dout,
  output logic [15:0] overflow
);
  localparam int AW = $clog2(DEPTH);
  iqacc_t         mem [DEPTH];
  logic [AW:0]    addr;
  logic [AW-1:0]  a1;
  logic           v1, w1, f1, l1, last1;
  iqacc_t         d1, rd1, sum;

  always_comb begin
    if (f1) sum = d1;
    else begin
      sum.i = rd1.i + d1.i;
      sum.q = rd1.q + d1.q;
    end
  end

  always_ff @(posedge clk) begin
    rd1 <= mem[addr[AW-1:0]];
    if (v1 && w1) mem[a1] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0; a1 <= '0; v1 <= 1'b0; w1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0;
      last1 <= 1'b0; d1 <= '0; dout <= '0; overflow <= '0;
    end else begin
      if (rep_start) addr <= '0;
      else if (din.valid && enable && !addr[AW]) addr <= addr + 1'b1;
      if (din.valid && enable && addr[AW] && overflow != 16'hffff) overflow <= overflow + 1'b1;
      v1    <= din.valid;
      w1    <= enable & ~addr[AW] & ~rep_start;
      a1    <= addr[AW-1:0];
      f1    <= first_rep;
      l1    <= last_rep;
      last1 <= din.last;
      d1    <= din.d;
      if (enable) begin
        dout.valid <= v1 & w1 & l1;
        dout.last  <= v1 & w1 & l1 & last1;
        dout.d     <= sum;
      end else begin
        dout.valid <= v1;
        dout.last  <= last1;
        dout.d     <= d1;
      end
    end
  end

endmodule
