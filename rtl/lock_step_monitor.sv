// lock_step_monitor: on-demand lockstep of otherwise independent cores.
//
// Offers each of the N_PORTS processing blocks two Avalon slave ports: psyb,
// the sync bus on which a block asks to join (and later to leave) safe
// processing, and plsb, the lockstep bus on which the joined blocks run the
// safe code. The voted result of the plsb buses leaves on the lsb master
// port towards ls_RAM and ls_I/O. Sub-components, as in the paper:
//   controller   - trigger (request_sp pin or control bus), participants
//                  register, irq to recruit processing blocks
//   synchronizer - marshals the first N responders into lockstep, enabled[]
//   voter        - compare_matrix, majority_voter, bus_multiplexer
//   observer     - time-outs on the synchronizer's states and the voter's
//                  no_majority, giving the sticky availability error
// Sequence: trigger -> start + irq -> blocks read LOCKSTEP_SYNC_ADDRESS and
// stall -> N reads collected: the first N read ACCEPT, lockstep_processing
// rises, irq falls -> the voted safe code runs over plsb/lsb -> each block
// reads LOCKSTEP_SYNC_ADDRESS again -> majority reached: all are released
// and the monitor returns to idle. dissent shows, cycle by cycle, which
// participants the voter outvotes.
module lock_step_monitor
  import lsm_pkg::*;
#(
  parameter int unsigned N_PORTS              = 3,
  parameter int unsigned DEFAULT_PARTICIPANTS = 3,
  parameter int unsigned SYNC_TIMEOUT         = 1024,
  parameter int unsigned LOCKSTEP_TIMEOUT     = 65536
) (
  input  logic               clk,
  input  logic               rst_n,
  input  av_req_t            plsb_req [N_PORTS],
  output av_rsp_t            plsb_rsp [N_PORTS],
  input  av_req_t            psyb_req [N_PORTS],
  output av_rsp_t            psyb_rsp [N_PORTS],
  input  av_req_t            ctrl_req,
  output av_rsp_t            ctrl_rsp,
  output av_req_t            lsb_req,
  input  av_rsp_t            lsb_rsp,
  input  logic               request_sp,
  output logic               irq,
  output logic               error,
  output err_cause_t         error_cause,
  output logic               lockstep_processing,
  output logic [N_PORTS-1:0] enabled,
  output logic [N_PORTS-1:0] dissent,
  output sync_state_t        sync_state
);

  localparam int unsigned PW = $clog2(N_PORTS + 1);

  logic          start;
  logic [PW-1:0] participants;
  logic          no_majority;

  controller #(
    .N_PORTS              (N_PORTS),
    .DEFAULT_PARTICIPANTS (DEFAULT_PARTICIPANTS)
  ) u_controller (
    .clk                 (clk),
    .rst_n               (rst_n),
    .ctrl_req            (ctrl_req),
    .ctrl_rsp            (ctrl_rsp),
    .request_sp          (request_sp),
    .lockstep_processing (lockstep_processing),
    .sync_state          (sync_state),
    .enabled             (enabled),
    .error               (error),
    .error_cause         (error_cause),
    .start               (start),
    .participants        (participants),
    .irq                 (irq)
  );

  synchronizer #(.N_PORTS(N_PORTS)) u_synchronizer (
    .clk                 (clk),
    .rst_n               (rst_n),
    .psyb_req            (psyb_req),
    .psyb_rsp            (psyb_rsp),
    .start               (start),
    .participants        (participants),
    .enabled             (enabled),
    .lockstep_processing (lockstep_processing),
    .state               (sync_state)
  );

  voter #(.N_PORTS(N_PORTS)) u_voter (
    .plsb_req    (plsb_req),
    .plsb_rsp    (plsb_rsp),
    .enabled     (enabled),
    .lsb_req     (lsb_req),
    .lsb_rsp     (lsb_rsp),
    .no_majority (no_majority),
    .dissent     (dissent)
  );

  observer #(
    .SYNC_TIMEOUT     (SYNC_TIMEOUT),
    .LOCKSTEP_TIMEOUT (LOCKSTEP_TIMEOUT)
  ) u_observer (
    .clk         (clk),
    .rst_n       (rst_n),
    .state       (sync_state),
    .no_majority (no_majority),
    .error       (error),
    .error_cause (error_cause)
  );

endmodule
