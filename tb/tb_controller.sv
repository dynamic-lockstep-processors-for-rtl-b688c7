// Testbench of controller: participants register rules (odd, >= 3, <= N),
// trigger over the control bus and over request_sp, start pulse and irq
// timing, irq drop on lockstep_processing, ignored triggers while busy,
// status register.
module tb_controller;
  import lsm_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  av_req_t ctrl_req = AV_REQ_IDLE;
  av_rsp_t ctrl_rsp;
  logic request_sp = 0, lockstep_processing = 0;
  sync_state_t sync_state = SYNC_IDLE;
  logic [N-1:0] enabled = '0;
  logic error = 0;
  err_cause_t error_cause = ERR_NONE;
  logic start;
  logic [2:0] participants;
  logic irq;
  int checks = 0, failures = 0;
  int starts = 0;

  controller #(.N_PORTS(N), .DEFAULT_PARTICIPANTS(3)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) starts++;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic wr(logic [1:0] r, logic [31:0] v);
    @(negedge clk);
    ctrl_req = '{address: CTRL_BASE | 32'(r) << 2, read: 1'b0, write: 1'b1, writedata: v, byteenable: 4'hF};
    #1 chk(!ctrl_rsp.waitrequest, "no wait");
    @(posedge clk); #1 ctrl_req = AV_REQ_IDLE;
  endtask

  task automatic rd(logic [1:0] r, output logic [31:0] v);
    @(negedge clk);
    ctrl_req = '{address: CTRL_BASE | 32'(r) << 2, read: 1'b1, write: 1'b0, writedata: 0, byteenable: 4'hF};
    #1 v = ctrl_rsp.readdata;
    @(posedge clk); #1 ctrl_req = AV_REQ_IDLE;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] v;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    chk(participants == 3 && !irq, "reset values");
    wr(REG_PARTICIPANTS, 4);  chk(participants == 3, "even rejected");
    wr(REG_PARTICIPANTS, 1);  chk(participants == 3, "one rejected");
    wr(REG_PARTICIPANTS, 7);  chk(participants == 3, "above N rejected");
    wr(REG_PARTICIPANTS, 5);  chk(participants == 5, "five accepted");
    rd(REG_PARTICIPANTS, v);  chk(v == 5, "read back");
    // bus trigger: start pulse right after the write, irq until lockstep
    wr(REG_CTRL, 1);
    chk(start && irq, "start and irq after bus trigger");
    @(posedge clk); #1 chk(!start && irq, "start is one pulse");
    wr(REG_CTRL, 1);          // ignored while requesting
    wr(REG_PARTICIPANTS, 3);  chk(participants == 5, "no change while busy");
    rd(REG_CTRL, v);          chk(v[0], "busy flag");
    repeat (5) @(negedge clk);
    chk(irq && starts == 1, "irq held, trigger ignored");
    lockstep_processing = 1; sync_state = SYNC_LOCKSTEP; enabled = 5'b00111;
    @(negedge clk); chk(!irq, "irq dropped on lockstep_processing");
    rd(REG_STATUS, v);
    chk(v[1:0] == 2'd2 && v[2] && !v[3] && v[12:8] == 5'b00111 && !v[6], "status");
    request_sp = 1; repeat (6) @(negedge clk); request_sp = 0;
    chk(starts == 1, "request_sp ignored during lockstep");
    lockstep_processing = 0; sync_state = SYNC_IDLE; enabled = '0;
    repeat (2) @(negedge clk);
    // external trigger: rising edge, two synchroniser stages
    @(negedge clk); request_sp = 1;
    @(posedge clk); #1 chk(!start, "not yet (sync 1)");
    @(posedge clk); #1 chk(!start, "not yet (sync 2)");
    @(posedge clk); #1 chk(start && irq, "start after synchroniser");
    repeat (4) @(negedge clk);
    chk(starts == 2, "level does not retrigger");
    error = 1; error_cause = ERR_SYNC_TIME;
    rd(REG_STATUS, v); chk(v[3] && v[5:4] == 2'd1 && v[6], "status error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
