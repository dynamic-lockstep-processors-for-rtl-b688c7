// avalon_decoder: address decoding between one Avalon master and N_SLAVES.
//
// Slave k is selected when (address & MASK[k]) == BASE[k]; the first match
// wins. The selected slave sees the master's request unchanged, the others
// see an idle bus, and the master gets the selected slave's response. An
// access that matches no window is answered at once with readdata 0.
// Combinational. The default map is a processing block's view of the system:
// system_RAM, lockstep bus (plsb), sync bus (psyb) and the monitor's control
// bus. The map is this design's; the paper leaves decoding to the vendor's
// generated interconnect.
module avalon_decoder
  import lsm_pkg::*;
#(
  parameter int unsigned N_SLAVES = 4,
  // Window k is BASE[k]/MASK[k]; element 0 is the rightmost in a concatenation.
  parameter logic [N_SLAVES-1:0][AW-1:0] BASE = {CTRL_BASE, SYNC_ADDRESS, LSB_BASE, SYSRAM_BASE},
  parameter logic [N_SLAVES-1:0][AW-1:0] MASK = {CTRL_MASK, SYNC_MASK, LSB_MASK, SYSRAM_MASK}
) (
  input  av_req_t m_req,
  output av_rsp_t m_rsp,
  output av_req_t s_req [N_SLAVES],
  input  av_rsp_t s_rsp [N_SLAVES]
);

  logic [N_SLAVES-1:0] hit;

  always_comb begin
    hit = '0;
    for (int k = 0; k < N_SLAVES; k++)
      if (((m_req.address & MASK[k]) == BASE[k]) && hit == '0) hit[k] = 1'b1;

    m_rsp.readdata    = '0;
    m_rsp.waitrequest = 1'b0;
    for (int k = 0; k < N_SLAVES; k++) begin
      s_req[k] = hit[k] ? m_req : AV_REQ_IDLE;
      if (hit[k]) m_rsp = s_rsp[k];
    end
  end

endmodule
