// controller: starts safe processing and recruits processing blocks.
//
// Safe processing is triggered by a rising edge on the external request_sp
// input (synchronised with two flip-flops) or by writing 1 to bit 0 of the
// CTRL register over the control bus. A trigger sends a one-cycle start pulse
// to the synchronizer and raises irq, the request to all processing blocks
// to join; irq stays high until the synchronizer reports lockstep_processing,
// and a new trigger is ignored until that lockstep run has ended.
// The number of participants is a register: only odd values of at least
// three and at most N_PORTS are accepted, so the voter always has a majority.
// Control-bus registers (word offset = address bits [3:2]), all answered
// without wait states:
//   0 CTRL          W bit0 = trigger;  R bit0 = request or run in progress
//   1 PARTICIPANTS  RW number of participants
//   2 STATUS        R [1:0] synchronizer state, [2] lockstep_processing,
//                     [3] error, [5:4] error cause, [6] irq, [8+:N] enabled
// The trigger sources, the participants rule and the irq behaviour are the
// paper's; the register map and the edge-triggered request_sp are this
// design's.
module controller
  import lsm_pkg::*;
#(
  parameter int unsigned N_PORTS              = 3,
  parameter int unsigned DEFAULT_PARTICIPANTS = 3,
  localparam int unsigned PW = $clog2(N_PORTS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  av_req_t            ctrl_req,
  output av_rsp_t            ctrl_rsp,
  input  logic               request_sp,
  input  logic               lockstep_processing,
  input  sync_state_t        sync_state,
  input  logic [N_PORTS-1:0] enabled,
  input  logic               error,
  input  err_cause_t         error_cause,
  output logic               start,
  output logic [PW-1:0]      participants,
  output logic               irq
);

  typedef enum logic [1:0] {C_IDLE, C_REQUEST, C_ACTIVE} ctrl_state_t;

  ctrl_state_t cstate;
  logic [2:0]  req_sync;     // two synchroniser stages + edge history
  logic        trigger, bus_trigger, bus_part_wr, part_ok, idle_now;
  logic [1:0]  reg_sel;

  assign reg_sel     = ctrl_req.address[3:2];
  assign bus_trigger = ctrl_req.write && reg_sel == REG_CTRL && ctrl_req.writedata[0];
  assign bus_part_wr = ctrl_req.write && reg_sel == REG_PARTICIPANTS;
  assign part_ok     = ctrl_req.writedata[0] && ctrl_req.writedata >= 32'd3 &&
                       ctrl_req.writedata <= 32'(N_PORTS);
  assign trigger     = bus_trigger || (req_sync[1] && !req_sync[2]);
  // Idle again in the very cycle the synchronizer leaves lockstep.
  assign idle_now    = (cstate == C_IDLE) || (cstate == C_ACTIVE && !lockstep_processing);

  always_comb begin
    ctrl_rsp.waitrequest = 1'b0;
    ctrl_rsp.readdata    = '0;
    unique case (reg_sel)
      REG_CTRL:         ctrl_rsp.readdata[0] = !idle_now;
      REG_PARTICIPANTS: ctrl_rsp.readdata    = 32'(participants);
      REG_STATUS: begin
        ctrl_rsp.readdata[1:0]           = sync_state;
        ctrl_rsp.readdata[2]             = lockstep_processing;
        ctrl_rsp.readdata[3]             = error;
        ctrl_rsp.readdata[5:4]           = error_cause;
        ctrl_rsp.readdata[6]             = irq;
        ctrl_rsp.readdata[8+:N_PORTS]    = enabled;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cstate       <= C_IDLE;
      req_sync     <= '0;
      start        <= 1'b0;
      irq          <= 1'b0;
      participants <= PW'(DEFAULT_PARTICIPANTS);
    end else begin
      req_sync <= {req_sync[1:0], request_sp};
      start    <= 1'b0;
      if (bus_part_wr && part_ok && idle_now)
        participants <= PW'(ctrl_req.writedata);
      if (idle_now) begin
        cstate <= trigger ? C_REQUEST : C_IDLE;
        start  <= trigger;
        irq    <= trigger;
      end else if (cstate == C_REQUEST && lockstep_processing) begin
        cstate <= C_ACTIVE;
        irq    <= 1'b0;
      end
    end
  end

endmodule
