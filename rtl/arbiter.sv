// arbiter: shares one Avalon slave between N_PORTS masters.
//
// In the system each processing block reaches system_RAM (and the control
// bus of the lock-step monitor) through one arbiter port. Grants rotate
// round-robin: the search for the next requesting master starts after the
// master served last. Once a granted transfer is stalled by the slave the
// grant is locked to that master until its transfer completes, so a stalled
// transfer is never re-routed. Masters that are not granted see waitrequest
// high while they request. The grant is combinational: a transfer can reach
// the slave in the cycle it is presented. The arbitration policy is this
// design's choice; the paper only asks for arbitration between simultaneous
// accesses.
module arbiter
  import lsm_pkg::*;
#(
  parameter int unsigned N_PORTS = 3,
  localparam int unsigned IW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  av_req_t m_req [N_PORTS],
  output av_rsp_t m_rsp [N_PORTS],
  output av_req_t s_req,
  input  av_rsp_t s_rsp
);

  logic [N_PORTS-1:0] want;
  logic               locked, gnt_valid;
  logic [IW-1:0]      owner, last, gnt;

  always_comb begin
    for (int i = 0; i < N_PORTS; i++) want[i] = m_req[i].read || m_req[i].write;

    gnt_valid = 1'b0;
    gnt       = '0;
    for (int k = 1; k <= N_PORTS; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % N_PORTS;
      if (!gnt_valid && want[idx]) begin
        gnt_valid = 1'b1;
        gnt       = IW'(idx);
      end
    end
    if (locked) begin
      gnt_valid = 1'b1;
      gnt       = owner;
    end

    s_req = gnt_valid ? m_req[gnt] : AV_REQ_IDLE;
    for (int i = 0; i < N_PORTS; i++) begin
      if (gnt_valid && gnt == IW'(i)) begin
        m_rsp[i] = s_rsp;
      end else begin
        m_rsp[i].readdata    = '0;
        m_rsp[i].waitrequest = want[i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      locked <= 1'b0;
      owner  <= '0;
      last   <= IW'(N_PORTS - 1);
    end else if (gnt_valid && want[gnt]) begin
      if (s_rsp.waitrequest) begin
        locked <= 1'b1;
        owner  <= gnt;
      end else begin
        locked <= 1'b0;
        last   <= gnt;
      end
    end
  end

  for (genvar g = 0; g < N_PORTS; g++) begin : g_hold
    a_hold_req : assert property (@(posedge clk) disable iff (!rst_n)
      (want[g] && m_rsp[g].waitrequest) |=> want[g]);
  end

endmodule
