// exec_scheduler: starts an execution at a scheduled value of the shared time
// counter. A host arm command latches the request; once the counter reaches
// sched_time (unsigned >=, so a time already past fires at once) the unit's
// skew setting, in clock cycles, delays the start to compensate the measured
// inter-unit delay. Timing: start is a one-cycle pulse in the cycle where
// count == sched_time + skew + 1 (when armed in time). armed is high while
// waiting. A new arm while waiting replaces the request.
// Starting at a scheduled counter value follows the paper; the skew as a
// per-unit delay in clocks and the arm command are this design's choices.
module exec_scheduler
  import qube_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             arm,
  input  logic [CNT_W-1:0] sched_time,
  input  logic [7:0]       skew,
  input  logic [CNT_W-1:0] count,
  output logic             start,
  output logic             armed
);
  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_DELAY} state_t;
  state_t     state;
  logic [7:0] dly;

  assign armed = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; dly <= '0; start <= 1'b0;
    end else begin
      start <= 1'b0;
      if (arm) begin
        state <= S_ARMED;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_ARMED:
            if (count >= sched_time) begin
              if (skew == '0) begin
                start <= 1'b1;
                state <= S_IDLE;
              end else begin
                dly   <= skew - 1'b1;
                state <= S_DELAY;
              end
            end
          S_DELAY:
            if (dly == '0) begin
              start <= 1'b1;
              state <= S_IDLE;
            end else begin
              dly <= dly - 1'b1;
            end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
