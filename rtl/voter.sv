// voter: the safety-critical part of the lock-step monitor.
//
// Composition of the three sub-components the paper names: compare_matrix
// builds the equality matrix of the plsb inputs, majority_voter chooses the
// majority input among those the synchronizer enabled, bus_multiplexer drives
// it onto the voted safe bus lsb and answers the agreeing inputs. no_majority
// goes to the observer; dissent marks the enabled inputs that are outvoted in
// the present cycle (this design's addition, for fault reporting). Purely
// combinational: a transfer reaches lsb in the
// cycle the inputs present it, so lockstep adds no latency to the safe bus.
module voter
  import lsm_pkg::*;
#(
  parameter int unsigned N_PORTS = 3
) (
  input  av_req_t            plsb_req [N_PORTS],
  output av_rsp_t            plsb_rsp [N_PORTS],
  input  logic [N_PORTS-1:0] enabled,
  output av_req_t            lsb_req,
  input  av_rsp_t            lsb_rsp,
  output logic               no_majority,
  output logic [N_PORTS-1:0] dissent
);

  localparam int unsigned IW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;

  logic [N_PORTS-1:0] equal [N_PORTS];
  logic               sel_valid;
  logic [IW-1:0]      sel_idx;
  logic [N_PORTS-1:0] agree;

  compare_matrix #(.N_PORTS(N_PORTS)) u_compare_matrix (
    .req   (plsb_req),
    .equal (equal)
  );

  majority_voter #(.N_PORTS(N_PORTS)) u_majority_voter (
    .equal       (equal),
    .enabled     (enabled),
    .sel_valid   (sel_valid),
    .sel_idx     (sel_idx),
    .agree       (agree),
    .no_majority (no_majority)
  );

  // Enabled inputs outvoted in this cycle (a majority exists, they differ).
  assign dissent = sel_valid ? (enabled & ~agree) : '0;

  bus_multiplexer #(.N_PORTS(N_PORTS)) u_bus_multiplexer (
    .plsb_req  (plsb_req),
    .plsb_rsp  (plsb_rsp),
    .enabled   (enabled),
    .sel_valid (sel_valid),
    .sel_idx   (sel_idx),
    .agree     (agree),
    .lsb_req   (lsb_req),
    .lsb_rsp   (lsb_rsp)
  );

endmodule
