// time_counter: the unit's copy of the shared time counter. It counts FPGA
// clocks. The clock master sends, over the Sync path, the value the counter
// must hold in the cycle after the next rising edge of the 62.5 kHz timing
// reference; the unit keeps that value pending and loads it when it sees the
// edge. Because every unit sees the same reference edge through the star
// clock distribution, all counters then agree to the cycle.
//
// timing_ref is asynchronous and goes through a two-flop synchroniser; the
// edge is detected one flop later, exactly as in sync_master, so both sides
// see the edge in the same cycle. synced goes high at the first load.
// The load-at-next-edge protocol is this design's choice.
module time_counter
  import qube_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             timing_ref,
  input  logic             sync_valid,
  input  logic [CNT_W-1:0] sync_value,
  output logic [CNT_W-1:0] count,
  output logic             synced,
  output logic             ref_edge
);
  logic [2:0]       ref_sr;
  logic             pending;
  logic [CNT_W-1:0] pend_val;

  assign ref_edge = ref_sr[1] & ~ref_sr[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_sr <= '0; count <= '0; pending <= 1'b0; pend_val <= '0; synced <= 1'b0;
    end else begin
      ref_sr <= {ref_sr[1:0], timing_ref};
      if (ref_edge && pending) begin
        count   <= pend_val;
        pending <= 1'b0;
        synced  <= 1'b1;
      end else begin
        count <= count + 1'b1;
      end
      if (sync_valid) begin
        pending  <= 1'b1;
        pend_val <= sync_value;
      end
    end
  end

endmodule
