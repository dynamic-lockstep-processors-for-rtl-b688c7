// Testbench of lock_step_monitor with its three ports driven directly and a
// memory model on lsb. Follows the sequence of a safe-processing request:
// trigger over the control bus, irq, three sync reads (stalled until the
// third), accept, lockstepped reads and writes reaching lsb once each, the
// exit reads, release and irq/lockstep_processing timing; then a run with a
// faulty block (outvoted) and one without majority (error).
module tb_lock_step_monitor;
  import lsm_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  av_req_t plsb_req [N], psyb_req [N];
  av_rsp_t plsb_rsp [N], psyb_rsp [N];
  av_req_t ctrl_req = AV_REQ_IDLE;
  av_rsp_t ctrl_rsp;
  av_req_t lsb_req;
  av_rsp_t lsb_rsp;
  logic request_sp = 0, irq, error, lockstep_processing;
  err_cause_t error_cause;
  logic [N-1:0] enabled, dissent;
  sync_state_t sync_state;
  int checks = 0, failures = 0;

  lock_step_monitor #(.N_PORTS(N), .SYNC_TIMEOUT(100), .LOCKSTEP_TIMEOUT(500)) dut (.*);

  always #5 clk = ~clk;

  // lsb slave: 16 words, no wait states, counts completed transfers
  logic [31:0] mem [16];
  int lsb_xfers = 0, n_dissent = 0;
  always @(posedge clk) if (rst_n && dissent[2]) n_dissent++;
  assign lsb_rsp = '{readdata: mem[lsb_req.address[5:2]], waitrequest: 1'b0};
  always @(posedge clk) begin
    if (lsb_req.write) mem[lsb_req.address[5:2]] <= lsb_req.writedata;
    if (lsb_req.read || lsb_req.write) lsb_xfers++;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic sync_rd(int p, output logic [31:0] d, output int w);
    @(negedge clk);
    psyb_req[p] = '{address: SYNC_ADDRESS, read: 1'b1, write: 1'b0, writedata: 0, byteenable: 4'hF};
    w = 0; #1;
    while (psyb_rsp[p].waitrequest) begin @(negedge clk); #1; w++; end
    d = psyb_rsp[p].readdata;
    @(posedge clk); #1 psyb_req[p] = AV_REQ_IDLE;
  endtask

  task automatic ls(int p, logic wr, int a, logic [31:0] wd, output logic [31:0] d);
    @(negedge clk);
    plsb_req[p] = '{address: LSRAM_BASE + 32'(4 * a), read: !wr, write: wr, writedata: wd, byteenable: 4'hF};
    #1;
    while (plsb_rsp[p].waitrequest) begin @(negedge clk); #1; end
    d = plsb_rsp[p].readdata;
    @(posedge clk); #1 plsb_req[p] = AV_REQ_IDLE;
  endtask

  task automatic trigger();
    @(negedge clk);
    ctrl_req = '{address: CTRL_BASE, read: 1'b0, write: 1'b1, writedata: 1, byteenable: 4'hF};
    @(posedge clk); #1 ctrl_req = AV_REQ_IDLE;
  endtask

  logic [31:0] res [N];
  logic [31:0] acc [N];
  task automatic block(int p, logic [31:0] fault, int late);
    logic [31:0] d, a; int w;
    repeat (late) @(negedge clk);
    sync_rd(p, acc[p], w);
    if (acc[p] != 0) begin
      ls(p, 0, 1, 0, a);
      ls(p, 1, 2, a * 3 + fault, d);
      ls(p, 0, 2, 0, res[p]);
      sync_rd(p, d, w);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w0, t_irq;
  initial begin
    for (int i = 0; i < N; i++) begin plsb_req[i] = AV_REQ_IDLE; psyb_req[i] = AV_REQ_IDLE; end
    for (int i = 0; i < 16; i++) mem[i] = 32'(i * 7);
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- normal run
    trigger();
    chk(irq, "irq after trigger");
    lsb_xfers = 0;
    fork
      block(0, 0, 0);
      block(1, 0, 3);
      block(2, 0, 6);
      begin wait (lockstep_processing); @(posedge clk); #1 chk(!irq, "irq dropped once lockstep began"); end
    join
    chk(acc[0] == SYNC_ACCEPT && acc[1] == SYNC_ACCEPT && acc[2] == SYNC_ACCEPT, "all accepted");
    chk(res[0] == 21 && res[1] == 21 && res[2] == 21, "lockstep result");
    chk(mem[2] == 21, "voted write reached lsb");
    chk(lsb_xfers == 3, "each lockstep transfer once on lsb");
    chk(!lockstep_processing && enabled == '0 && !error, "released");
    // ---- outvoted block
    mem[1] = 5;
    trigger();
    fork block(0, 0, 0); block(1, 0, 0); block(2, 32'h100, 0); join
    chk(res[0] == 15 && res[1] == 15 && mem[2] == 15, "majority wins");
    chk(res[2] == 0 && !error, "minority cut off, no error");
    chk(n_dissent > 0, "outvoted block reported");
    // ---- no majority
    trigger();
    fork
      block(0, 0, 0); block(1, 1, 0); block(2, 2, 0);
      begin wait (error); end
    join_any
    chk(error_cause == ERR_NO_MAJORITY, "no majority -> error");
    disable fork;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
