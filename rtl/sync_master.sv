// sync_master: time-counter logic of the clock-master FPGA. It counts clocks,
// measures the period of the 62.5 kHz timing reference in clocks, and after
// every reference edge broadcasts on the Sync path the value its own counter
// will hold in the cycle after the next edge: count_at_edge + period + 1.
// Units load that value at that edge (see time_counter), so their counters
// match the master's. Nothing is sent until one full period has been
// measured. The reference uses the same synchroniser and edge detector as
// time_counter. sync_valid pulses one cycle after each edge. The message
// content is this design's choice; the transport (10-GbE) is not modelled.
module sync_master
  import qube_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             timing_ref,
  output logic [CNT_W-1:0] count,
  output logic             sync_valid,
  output logic [CNT_W-1:0] sync_value
);
  logic [2:0]       ref_sr;
  logic             ref_edge;
  logic [CNT_W-1:0] last_edge;
  logic [1:0]       n_edges;

  assign ref_edge = ref_sr[1] & ~ref_sr[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_sr <= '0; count <= '0; last_edge <= '0; n_edges <= '0;
      sync_valid <= 1'b0; sync_value <= '0;
    end else begin
      ref_sr     <= {ref_sr[1:0], timing_ref};
      count      <= count + 1'b1;
      sync_valid <= 1'b0;
      if (ref_edge) begin
        last_edge <= count;
        if (n_edges != 2'd2) n_edges <= n_edges + 1'b1;
        if (n_edges != 2'd0) begin
          sync_valid <= 1'b1;
          sync_value <= count + (count - last_edge) + 1'b1;
        end
      end
    end
  end

endmodule
