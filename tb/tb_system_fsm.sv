// Testbench of system_fsm: boot verdicts, the normal -> synchronise -> safe
// processing -> normal cycle, counting of outvoted cycles, entry into the
// permanent safe state from every state that has the transition.
module tb_system_fsm;
  import lsm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic boot_ok = 0, boot_nok = 0, lockstep_processing = 0, error = 0, any_dissent = 0;
  sync_state_t sync_state = SYNC_IDLE;
  sys_state_t sys_state;
  logic safe_state;
  logic [15:0] nok_count;
  int checks = 0, failures = 0;

  system_fsm dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic step();
    @(posedge clk); #1;
  endtask

  task automatic do_reset();
    @(negedge clk); rst_n = 0; boot_ok = 0; boot_nok = 0; error = 0;
    lockstep_processing = 0; any_dissent = 0; sync_state = SYNC_IDLE;
    step(); step(); rst_n = 1;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    do_reset();
    chk(sys_state == SYS_BOOT && !safe_state, "boot after reset");
    step(); step(); chk(sys_state == SYS_BOOT, "waits for the boot verdict");
    boot_ok = 1; step(); boot_ok = 0;
    chk(sys_state == SYS_NORMAL, "boot_ok -> normal");
    for (int run = 0; run < 2; run++) begin
      sync_state = SYNC_COLLECT; step();
      chk(sys_state == SYS_SYNCHRONISE, "request -> synchronise");
      sync_state = SYNC_LOCKSTEP; lockstep_processing = 1; step();
      chk(sys_state == SYS_SAFE_PROCESSING, "start -> safe processing");
      any_dissent = 1; step(); step(); step(); any_dissent = 0; step();
      chk(sys_state == SYS_SAFE_PROCESSING, "outvoted processors tolerated");
      chk(nok_count == 16'(3 * (run + 1)), "nok counted");
      sync_state = SYNC_IDLE; lockstep_processing = 0; step();
      chk(sys_state == SYS_NORMAL, "end -> normal");
    end
    error = 1; step();
    chk(sys_state == SYS_SAFE_STATE && safe_state, "normal -> safe state");
    error = 0; step(); step(); chk(safe_state, "safe state is permanent");
    // boot_nok
    do_reset(); boot_nok = 1; boot_ok = 1; step();
    chk(safe_state, "boot_nok -> safe state");
    // synchronise -> safe state
    do_reset(); boot_ok = 1; step(); boot_ok = 0;
    sync_state = SYNC_COLLECT; step(); error = 1; step();
    chk(safe_state, "synchronise -> safe state");
    // safe processing -> safe state
    do_reset(); boot_ok = 1; step(); boot_ok = 0;
    sync_state = SYNC_LOCKSTEP; lockstep_processing = 1; step();
    chk(sys_state == SYS_SAFE_PROCESSING, "direct start");
    error = 1; step();
    chk(safe_state, "safe processing -> safe state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
