// observer: availability watchdog of the lock-step monitor.
//
// Counts the cycles the synchronizer has spent in its present state; the
// count restarts at every state transition. If marshalling the participants
// (COLLECT) is still going on in its cycle SYNC_TIMEOUT+1, or the safe task
// (LOCKSTEP) in its cycle LOCKSTEP_TIMEOUT+1, or the voter reports during
// lockstep that there is no majority,
// the availability error is raised. The error is sticky until reset: it is
// the entry into the permanent safe state. error_cause tells which check
// fired first. Watching the state transitions and flagging a missing majority
// is the paper's; the two limits and their defaults are this design's.
// error is registered: it rises in the cycle after the condition.
module observer
  import lsm_pkg::*;
#(
  parameter int unsigned SYNC_TIMEOUT     = 1024,
  parameter int unsigned LOCKSTEP_TIMEOUT = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  input  sync_state_t state,
  input  logic        no_majority,
  output logic        error,
  output err_cause_t  error_cause
);

  sync_state_t prev_state;
  logic [31:0] dwell;      // cycles spent in prev_state so far
  logic [31:0] dwell_now;  // cycles before this one spent in the present state
  err_cause_t  cause_now;

  always_comb begin
    dwell_now = (state != prev_state) ? 32'd0 : dwell;
    cause_now = ERR_NONE;
    if (state == SYNC_COLLECT && dwell_now >= 32'(SYNC_TIMEOUT))
      cause_now = ERR_SYNC_TIME;
    else if (state == SYNC_LOCKSTEP && dwell_now >= 32'(LOCKSTEP_TIMEOUT))
      cause_now = ERR_LS_TIME;
    else if (state == SYNC_LOCKSTEP && no_majority)
      cause_now = ERR_NO_MAJORITY;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev_state  <= SYNC_IDLE;
      dwell       <= '0;
      error       <= 1'b0;
      error_cause <= ERR_NONE;
    end else begin
      prev_state <= state;
      if (state != prev_state) dwell <= 32'd1;
      else if (dwell != '1)    dwell <= dwell + 32'd1;
      if (!error && cause_now != ERR_NONE) begin
        error       <= 1'b1;
        error_cause <= cause_now;
      end
    end
  end

endmodule
