// capture_gate: the sequencer that ties waveform playback and capture to one
// time base. After a start pulse it runs n_reps repetitions (shots) of
// rep_period cycles each. In the first cycle of every repetition it pulses
// awg_start (waveform playback) and rep_start, and sets first_rep/last_rep.
// Inside a repetition it walks the timing list: window k opens when the
// in-repetition time equals entry k's start and stays open for entry k's
// length; gate_first/gate_last mark its ends. done pulses after the last
// repetition; busy is high throughout.
//
// Rules for the settings: entries sorted by start, non-overlapping, and
// ending at least 16 cycles before the end of the period so the capture
// pipeline drains before the next repetition. Zero-length entries are
// skipped. All outputs are registered (1 cycle after the state they report).
// The repetition structure and the entry format are this design's choices.
module capture_gate
  import qube_pkg::*;
#(
  parameter int TL_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_reps,
  input  logic [23:0] rep_period,
  input  logic [4:0]  n_sections,
  output logic [$clog2(TL_DEPTH)-1:0] tl_raddr,
  input  tl_entry_t   tl_entry,
  output logic        awg_start,
  output logic        rep_start,
  output logic        first_rep,
  output logic        last_rep,
  output logic        gate_open,
  output logic        gate_first,
  output logic        gate_last,
  output logic        busy,
  output logic        done
);
  logic [15:0] rep;
  logic [23:0] t;
  logic [4:0]  sec;
  logic        in_win;
  logic [15:0] rem;
  logic        sec_ok;

  assign tl_raddr = sec[$clog2(TL_DEPTH)-1:0];
  assign sec_ok   = (sec < n_sections) && (32'(sec) < TL_DEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rep <= '0; t <= '0; sec <= '0; in_win <= 1'b0; rem <= '0; busy <= 1'b0;
      awg_start <= 1'b0; rep_start <= 1'b0; first_rep <= 1'b0; last_rep <= 1'b0;
      gate_open <= 1'b0; gate_first <= 1'b0; gate_last <= 1'b0; done <= 1'b0;
    end else begin
      awg_start  <= 1'b0;
      rep_start  <= 1'b0;
      gate_open  <= 1'b0;
      gate_first <= 1'b0;
      gate_last  <= 1'b0;
      done       <= 1'b0;
      if (!busy) begin
        if (start && n_reps != '0 && rep_period != '0) begin
          busy <= 1'b1; rep <= '0; t <= '0; sec <= '0; in_win <= 1'b0;
        end
      end else begin
        if (t == '0) begin
          awg_start <= 1'b1;
          rep_start <= 1'b1;
          first_rep <= (rep == '0);
          last_rep  <= (rep == n_reps - 1'b1);
        end
        if (in_win) begin
          gate_open <= 1'b1;
          if (rem == '0) begin
            gate_last <= 1'b1;
            in_win    <= 1'b0;
            sec       <= sec + 1'b1;
          end else begin
            rem <= rem - 1'b1;
          end
        end else if (sec_ok && t == tl_entry.start) begin
          if (tl_entry.len == '0) begin
            sec <= sec + 1'b1;
          end else begin
            gate_open  <= 1'b1;
            gate_first <= 1'b1;
            if (tl_entry.len == 16'd1) begin
              gate_last <= 1'b1;
              sec       <= sec + 1'b1;
            end else begin
              in_win <= 1'b1;
              rem    <= tl_entry.len - 16'd2;
            end
          end
        end
        if (t == rep_period - 1'b1) begin
          t      <= '0;
          sec    <= '0;
          in_win <= 1'b0;
          if (rep == n_reps - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            rep <= rep + 1'b1;
          end
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

endmodule
