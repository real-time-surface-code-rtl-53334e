// round_controller: follows the circuit schedule of one shot and tags each
// measurement event.
//
// A shot is n_rounds stabilizer rounds followed by one final logical
// measurement of the data qubits. Feedback (a branch-control instruction to
// the AWGs) is scheduled after every fb_period-th round when fb_period is
// non-zero (the paper's "feedback every m rounds") and after the last round
// when fb_final_en is set (the paper's "final-round feedback"). The paper
// names these schedules; the counters and configuration inputs are this
// design's own. Tags are combinational from the counters and belong to the
// event offered on ev_valid in the same cycle; the counters advance on it.
// shot_start (or the final measurement) returns to round 1.
module round_controller
  import qec_pkg::*;
#(
  parameter int unsigned RW = 8          // round-counter width
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          shot_start,
  input  logic [RW-1:0] n_rounds,        // stabilizer rounds per shot (>= 1)
  input  logic [RW-1:0] fb_period,       // 0: no periodic feedback
  input  logic          fb_final_en,
  input  logic          ev_valid,
  output event_e        ev_kind,
  output logic          ev_first,
  output logic          ev_fb_round,
  output logic [RW-1:0] round_idx        // 0-based index of the next event
);

  logic [RW-1:0] cnt, mcnt;

  assign round_idx   = cnt;
  assign ev_kind     = (cnt == n_rounds) ? EV_FINAL : EV_ROUND;
  assign ev_first    = (cnt == '0);
  assign ev_fb_round = (ev_kind == EV_ROUND) &&
                       (((fb_period != '0) && (mcnt == fb_period - 1'b1)) ||
                        (fb_final_en && (cnt == n_rounds - 1'b1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      mcnt <= '0;
    end else if (shot_start) begin
      cnt  <= '0;
      mcnt <= '0;
    end else if (ev_valid) begin
      if (ev_kind == EV_FINAL) begin
        cnt  <= '0;
        mcnt <= '0;
      end else begin
        cnt  <= cnt + 1'b1;
        mcnt <= (mcnt == fb_period - 1'b1) ? '0 : mcnt + 1'b1;
      end
    end
  end

endmodule
