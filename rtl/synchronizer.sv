// synchronizer: marshals processing blocks into lockstep and out again.
//
// Each processing block owns one psyb port and signals interest in safe
// processing by reading LOCKSTEP_SYNC_ADDRESS. The synchronizer works in
// three states:
//   IDLE     - no safe processing requested: a sync read is answered at once
//              with REJECT (0).
//   COLLECT  - opened by the controller's start pulse (which also latches the
//              number of participants N; a read in the cycle of the pulse,
//              when irq rises, already counts). Every sync read is stalled
//              (waitrequest high) and its arrival order is recorded. As soon
//              as at least N reads are stalled, all of them are answered in the
//              same cycle: the first N arrivals read ACCEPT (1) and get their
//              bit in enabled[], the rest read REJECT and return to normal
//              processing. Reads arriving in the same cycle are ordered by
//              port index.
//   LOCKSTEP - lockstep_processing is high and the voter compares the enabled
//              blocks. A sync read from a block that is not enabled (a late
//              responder) is rejected at once. A sync read from an enabled
//              block is its exit request and is stalled until at least
//              M = floor(N/2)+1 enabled blocks have issued it; then all
//              stalled exit reads are released in one cycle, enabled[] is
//              cleared and the state returns to IDLE.
// Stall-then-accept for the first N responders, rejection of surplus and late
// blocks and the second read for a controlled release are the paper's. The
// codes, the same-cycle tie break and releasing on a majority of exit reads
// (so that up to N-M failed blocks cannot hold the others) are this design's
// choices. Arrivals are registered, so an answer comes no earlier than the
// cycle after the read is first presented. Writes on psyb are acknowledged
// and ignored.
module synchronizer
  import lsm_pkg::*;
#(
  parameter int unsigned N_PORTS = 3,
  localparam int unsigned PW = $clog2(N_PORTS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  av_req_t            psyb_req [N_PORTS],
  output av_rsp_t            psyb_rsp [N_PORTS],
  input  logic               start,
  input  logic [PW-1:0]      participants,
  output logic [N_PORTS-1:0] enabled,
  output logic               lockstep_processing,
  output sync_state_t        state
);

  logic [N_PORTS-1:0] waiting;             // stalled sync reads (COLLECT)
  logic [N_PORTS-1:0] exiting;             // stalled exit reads (LOCKSTEP)
  logic [PW-1:0]      stamp [N_PORTS];     // arrival order of waiting reads
  logic [PW-1:0]      n_part;              // latched number of participants

  logic [PW-1:0]      n_waiting, n_exiting, m_needed;
  logic [N_PORTS-1:0] rd, chosen;
  logic               grant, release_now;

  always_comb begin
    n_waiting = '0;
    n_exiting = '0;
    for (int i = 0; i < N_PORTS; i++) begin
      rd[i]      = psyb_req[i].read;
      n_waiting += PW'(waiting[i]);
      n_exiting += PW'(exiting[i]);
    end
    m_needed = (n_part >> 1) + PW'(1);

    // Rank of each waiting read: earlier stamp first, then lower index.
    for (int i = 0; i < N_PORTS; i++) begin
      logic [PW-1:0] rank;
      rank = '0;
      for (int j = 0; j < N_PORTS; j++)
        if (waiting[j] && ((stamp[j] < stamp[i]) || (stamp[j] == stamp[i] && j < i)))
          rank += PW'(1);
      chosen[i] = waiting[i] && (rank < n_part);
    end

    grant       = (state == SYNC_COLLECT) && (n_part != '0) && (n_waiting >= n_part);
    release_now = (state == SYNC_LOCKSTEP) && (n_exiting >= m_needed);

    for (int i = 0; i < N_PORTS; i++) begin
      psyb_rsp[i].readdata    = SYNC_REJECT;
      psyb_rsp[i].waitrequest = 1'b0;
      unique case (state)
        SYNC_IDLE: begin
          // irq rises together with start: stall instead of rejecting
          if (start) psyb_rsp[i].waitrequest = rd[i];
        end
        SYNC_COLLECT: begin
          psyb_rsp[i].waitrequest = rd[i] && !(grant && waiting[i]);
          if (chosen[i]) psyb_rsp[i].readdata = SYNC_ACCEPT;
        end
        SYNC_LOCKSTEP: begin
          if (enabled[i]) begin
            psyb_rsp[i].waitrequest = rd[i] && !(release_now && exiting[i]);
            psyb_rsp[i].readdata    = SYNC_ACCEPT;
          end
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= SYNC_IDLE;
      waiting <= '0;
      exiting <= '0;
      enabled <= '0;
      n_part  <= '0;
      for (int i = 0; i < N_PORTS; i++) stamp[i] <= '0;
    end else begin
      unique case (state)
        SYNC_IDLE: begin
          if (start) begin
            state  <= SYNC_COLLECT;
            n_part <= participants;
            for (int i = 0; i < N_PORTS; i++)
              if (rd[i]) begin
                waiting[i] <= 1'b1;
                stamp[i]   <= '0;
              end
          end
        end
        SYNC_COLLECT: begin
          if (grant) begin
            enabled <= chosen;
            waiting <= '0;
            state   <= SYNC_LOCKSTEP;
          end else begin
            for (int i = 0; i < N_PORTS; i++)
              if (rd[i] && !waiting[i]) begin
                waiting[i] <= 1'b1;
                stamp[i]   <= n_waiting;
              end
          end
        end
        SYNC_LOCKSTEP: begin
          if (release_now) begin
            enabled <= '0;
            exiting <= '0;
            state   <= SYNC_IDLE;
          end else begin
            exiting <= exiting | (rd & enabled);
          end
        end
        default: state <= SYNC_IDLE;
      endcase
    end
  end

  assign lockstep_processing = (state == SYNC_LOCKSTEP);

  // Avalon rule: a stalled read is held until it is answered.
  for (genvar g = 0; g < N_PORTS; g++) begin : g_hold
    a_hold_read : assert property (@(posedge clk) disable iff (!rst_n)
      (psyb_req[g].read && psyb_rsp[g].waitrequest) |=> psyb_req[g].read);
  end

endmodule
