// Testbench of synchronizer with five psyb ports and three participants:
// rejection while idle, stall of sync reads until the third arrives, accept
// of the first three and reject of a surplus one arriving in the same cycle,
// immediate reject of a late reader, release on the second exit read
// (majority of three), and a reject after release. Cycle counts checked.
module tb_synchronizer;
  import lsm_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  av_req_t psyb_req [N];
  av_rsp_t psyb_rsp [N];
  logic start = 0;
  logic [2:0] participants = 3'd3;
  logic [N-1:0] enabled;
  logic lockstep_processing;
  sync_state_t state;
  int checks = 0, failures = 0;

  synchronizer #(.N_PORTS(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // Sync read on port p; returns read data and the number of stalled cycles.
  task automatic sync_rd(int p, output logic [31:0] d, output int waits);
    @(negedge clk);
    psyb_req[p].read = 1'b1;
    psyb_req[p].address = SYNC_ADDRESS;
    waits = 0;
    #1;
    while (psyb_rsp[p].waitrequest) begin
      @(negedge clk); #1; waits++;
    end
    d = psyb_rsp[p].readdata;
    @(posedge clk); #1;
    psyb_req[p].read = 1'b0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d [N];
  int w [N];
  initial begin
    for (int i = 0; i < N; i++) psyb_req[i] = AV_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // idle: rejected at once
    sync_rd(0, d[0], w[0]);
    chk(d[0] == SYNC_REJECT && w[0] == 0, "idle reject");
    chk(state == SYNC_IDLE, "still idle");
    // start
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    chk(state == SYNC_COLLECT, "collect");
    fork
      sync_rd(1, d[1], w[1]);
      begin repeat (4) @(negedge clk); sync_rd(3, d[3], w[3]); end
      begin repeat (9) @(negedge clk); sync_rd(4, d[4], w[4]); end
      begin repeat (9) @(negedge clk); sync_rd(2, d[2], w[2]); end
    join
    // ports 1,3 arrive first; 2 and 4 arrive together -> 2 wins the tie
    chk(d[1] == SYNC_ACCEPT && d[3] == SYNC_ACCEPT && d[2] == SYNC_ACCEPT, "first three accepted");
    chk(d[4] == SYNC_REJECT, "surplus rejected");
    chk(w[2] == 1 && w[4] == 1, "released one cycle after the third read");
    chk(w[1] == 10, "first stalled until quorum");
    chk(enabled == 5'b01110, "enabled vector");
    chk(lockstep_processing && state == SYNC_LOCKSTEP, "lockstep");
    // late reader rejected immediately
    sync_rd(0, d[0], w[0]);
    chk(d[0] == SYNC_REJECT && w[0] == 0, "late reject");
    chk(lockstep_processing, "lockstep unaffected");
    // exit: port 1 first, then port 2 -> release, port 3 dropped
    fork
      sync_rd(1, d[1], w[1]);
      begin repeat (5) @(negedge clk); sync_rd(2, d[2], w[2]); end
    join
    chk(w[1] == 6 && w[2] == 1, "exit release on majority");
    chk(!lockstep_processing && enabled == '0 && state == SYNC_IDLE, "back to idle");
    sync_rd(3, d[3], w[3]);
    chk(d[3] == SYNC_REJECT && w[3] == 0, "straggler rejected after release");
    // a second run with all three exiting together
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      sync_rd(0, d[0], w[0]);
      sync_rd(1, d[1], w[1]);
      sync_rd(4, d[4], w[4]);
    join
    chk(enabled == 5'b10011 && d[0] == SYNC_ACCEPT && d[4] == SYNC_ACCEPT, "second run");
    fork
      sync_rd(0, d[0], w[0]);
      sync_rd(1, d[1], w[1]);
      sync_rd(4, d[4], w[4]);
    join
    chk(w[0] == 1 && w[1] == 1 && w[4] == 1 && state == SYNC_IDLE, "joint exit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
