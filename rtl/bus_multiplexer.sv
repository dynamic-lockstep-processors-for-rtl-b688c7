// bus_multiplexer: forwards the voted plsb transfer onto the safe bus lsb.
//
// The request of the input chosen by the majority voter is driven onto the
// lsb master port; without a valid selection lsb is held idle, as the paper
// prescribes. The slave's response (readdata, waitrequest) goes back to every
// enabled input that agrees with the selection, so the lockstepped blocks see
// the same answer in the same cycle. Enabled inputs that disagree are stalled
// with waitrequest high. Inputs that are not enabled never reach lsb: they
// are answered at once with readdata 0, which keeps ls_RAM private to the
// participants. The last two rules are this design's choice. Combinational.
module bus_multiplexer
  import lsm_pkg::*;
#(
  parameter int unsigned N_PORTS = 3,
  localparam int unsigned IW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1
) (
  input  av_req_t                plsb_req [N_PORTS],
  output av_rsp_t                plsb_rsp [N_PORTS],
  input  logic [N_PORTS-1:0]     enabled,
  input  logic                   sel_valid,
  input  logic [IW-1:0]          sel_idx,
  input  logic [N_PORTS-1:0]     agree,
  output av_req_t                lsb_req,
  input  av_rsp_t                lsb_rsp
);

  always_comb begin
    lsb_req = sel_valid ? plsb_req[sel_idx] : AV_REQ_IDLE;
    for (int i = 0; i < N_PORTS; i++) begin
      if (!enabled[i]) begin
        plsb_rsp[i].readdata    = '0;
        plsb_rsp[i].waitrequest = 1'b0;
      end else if (sel_valid && agree[i]) begin
        plsb_rsp[i] = lsb_rsp;
      end else begin
        plsb_rsp[i].readdata    = '0;
        plsb_rsp[i].waitrequest = 1'b1;
      end
    end
  end

endmodule
