// Testbench of observer with short limits: error exactly when COLLECT lasts
// SYNC_TIMEOUT cycles or LOCKSTEP lasts LOCKSTEP_TIMEOUT cycles, error on
// no_majority during lockstep, no error for shorter stays, stickiness. The
// error flag is registered: it is seen after the first cycle beyond the limit.
module tb_observer;
  import lsm_pkg::*;
  localparam int ST = 10, LT = 20;
  logic clk = 0, rst_n = 0;
  sync_state_t state = SYNC_IDLE;
  logic no_majority = 0;
  logic error;
  err_cause_t error_cause;
  int checks = 0, failures = 0;

  observer #(.SYNC_TIMEOUT(ST), .LOCKSTEP_TIMEOUT(LT)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic do_reset();
    @(negedge clk); rst_n = 0; state = SYNC_IDLE; no_majority = 0;
    repeat (2) @(negedge clk); rst_n = 1;
  endtask

  // stay n cycles in s, return the cycle (1-based) at which error was first seen
  task automatic stay(sync_state_t s, int n, output int first);
    first = 0;
    for (int c = 1; c <= n; c++) begin
      @(negedge clk); state = s;
      @(posedge clk); #1;
      if (error && first == 0) first = c;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int f;
  initial begin
    do_reset();
    stay(SYNC_IDLE, 100, f);      chk(f == 0, "idle has no limit");
    stay(SYNC_COLLECT, ST, f);    chk(f == 0, "collect within limit");
    stay(SYNC_LOCKSTEP, LT, f);   chk(f == 0, "lockstep within limit");
    stay(SYNC_COLLECT, ST, f);    chk(f == 0, "collect again, counter restarted");
    stay(SYNC_COLLECT, 5, f);     chk(f == 1, "collect timeout in cycle ST+1");
    chk(error_cause == ERR_SYNC_TIME, "cause sync");
    stay(SYNC_IDLE, 5, f);        chk(error, "sticky");
    do_reset();
    chk(!error, "reset clears");
    stay(SYNC_LOCKSTEP, LT + 3, f); chk(f == LT + 1, "lockstep timeout in cycle LT+1");
    chk(error_cause == ERR_LS_TIME, "cause lockstep");
    do_reset();
    stay(SYNC_LOCKSTEP, 3, f);
    @(negedge clk); no_majority = 1; @(posedge clk); #1;
    chk(error && error_cause == ERR_NO_MAJORITY, "no majority");
    do_reset();
    @(negedge clk); no_majority = 1;
    stay(SYNC_IDLE, 3, f); chk(f == 0, "no_majority ignored outside lockstep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
