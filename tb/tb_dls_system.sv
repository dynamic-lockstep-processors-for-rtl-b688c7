// End-to-end testbench of dls_system with five processing blocks, as in the
// five-core demonstrator, and short observer limits. The processing blocks
// are modelled by tasks that issue the bus transfers of the interrupt
// routine: a read of LOCKSTEP_SYNC_ADDRESS, the safe code on ls_RAM and
// ls_I/O when accepted, and the second sync read for the release. Scenarios:
//   1 a block triggers over the control bus (2oo3 voting, 3 participants);
//     four blocks answer in the same cycle, the fourth (highest index) is
//     surplus; the triggering block finishes its system_RAM work first,
//     answers late and is rejected
//   2 external request_sp with five participants
//   3 one participant computes a wrong result: it is outvoted, the safe
//     task still completes
//   4 two participants disagree with each other and with the third: no
//     majority, the availability error is raised
//   5 too few blocks answer: synchronisation time-out
//   6 failed boot checks: safe state without any processing
// ls_RAM runs with the triple-modular-redundant option: before scenario 2
// one copy of a loaded word is corrupted (hierarchical write, standing for
// an upset); the vote must mask it and report the correction.
// The system state (boot, normal, safe processing, safe state) is checked
// along the way.
// Every mechanism is counted and must occur at least once.
module tb_dls_system;
  import lsm_pkg::*;
  localparam int N = 5;
  localparam int LXW = 12;
  logic clk = 0, rst_n = 0;
  av_req_t core_req [N];
  av_rsp_t core_rsp [N];
  logic irq, request_sp = 0, error, lockstep_processing;
  err_cause_t error_cause;
  logic [N-1:0] enabled, dissent;
  logic boot_ok = 0, boot_nok = 0, safe_state;
  sys_state_t sys_state;
  logic [15:0] nok_count;
  av_req_t ls_io_req;
  av_rsp_t ls_io_rsp;
  logic ls_load_we = 0;
  logic [LXW-1:0] ls_load_addr = '0;
  logic [31:0] ls_load_data = '0;
  logic ls_ram_corrected;
  int checks = 0, failures = 0;

  dls_system #(
    .N_CORES(N), .SYNC_TIMEOUT(200), .LOCKSTEP_TIMEOUT(2000), .LSRAM_TMR(1'b1)
  ) dut (.*);

  always #5 clk = ~clk;

  // ls_I/O model: records writes, answers reads with a constant
  logic [31:0] io_log [$];
  assign ls_io_rsp = '{readdata: 32'h0000_10AD, waitrequest: 1'b0};
  always @(posedge clk) if (ls_io_req.write) io_log.push_back(ls_io_req.writedata);

  // mechanism counters
  int n_bus_trigger, n_pin_trigger, n_irq, n_sync_stall, n_accept, n_surplus_reject,
      n_late_reject, n_voted, n_outvoted, n_release, n_arb_stall, n_nomaj_err,
      n_sync_timeout, n_io_write, n_part_write, n_boot_nok, n_nok, n_tmr_corrected;
  logic irq_q;
  always @(posedge clk) begin
    irq_q <= irq;
    if (irq && !irq_q) n_irq++;
    if (ls_ram_corrected) n_tmr_corrected++;
    if (dut.lsb_req.read || dut.lsb_req.write)
      if (!dut.lsb_rsp.waitrequest) n_voted++;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic bus(int p, logic wr, logic [31:0] a, logic [31:0] wd, output logic [31:0] rd, output int waits);
    @(negedge clk);
    core_req[p] = '{address: a, read: !wr, write: wr, writedata: wd, byteenable: 4'hF};
    waits = 0; #1;
    while (core_rsp[p].waitrequest) begin @(negedge clk); #1; waits++; end
    rd = core_rsp[p].readdata;
    @(posedge clk); #1 core_req[p] = AV_REQ_IDLE;
  endtask

  // Safe code: C = A + B (+ fault), store to ls_RAM and to ls_I/O, read back.
  logic [31:0] safe_result [N];
  task automatic safe_code(int p, logic [31:0] fault);
    logic [31:0] a, b, c; int w;
    bus(p, 0, LSRAM_BASE + 0, 0, a, w);
    bus(p, 0, LSRAM_BASE + 4, 0, b, w);
    bus(p, 1, LSRAM_BASE + 8, a + b + fault, c, w);
    bus(p, 1, LSIO_BASE, a + b + fault, c, w);
    bus(p, 0, LSRAM_BASE + 8, 0, c, w);
    safe_result[p] = c;
  endtask

  // Interrupt routine of one block (Fig. 7 style): sync read, test low byte.
  logic acc [N];
  task automatic isr(int p, logic [31:0] fault, int late);
    logic [31:0] d; int w;
    repeat (late) @(negedge clk);
    bus(p, 0, SYNC_ADDRESS, 0, d, w);
    if (w > 0) n_sync_stall++;
    acc[p] = (d[7:0] != 0);
    if (acc[p]) begin
      n_accept++;
      safe_code(p, fault);
      bus(p, 0, SYNC_ADDRESS, 0, d, w);   // controlled release
    end
  endtask

  // Normal application traffic on system_RAM.
  task automatic app(int p, int rounds);
    logic [31:0] d; int w;
    for (int k = 0; k < rounds; k++) begin
      bus(p, 1, SYSRAM_BASE + 32'(64 * p + 4 * (k % 8)), 32'(1000 * p + k), d, w);
      bus(p, 0, SYSRAM_BASE + 32'(64 * p + 4 * (k % 8)), 0, d, w);
      chk(d == 32'(1000 * p + k), "system_RAM data");
      if (w > 1) n_arb_stall++;
    end
  endtask

  task automatic ctrl_wr(int p, logic [1:0] r, logic [31:0] v);
    logic [31:0] d; int w;
    bus(p, 1, CTRL_BASE + 32'(r) * 4, v, d, w);
  endtask

  task automatic ctrl_rd(int p, logic [1:0] r, output logic [31:0] v);
    int w;
    bus(p, 0, CTRL_BASE + 32'(r) * 4, 0, v, w);
  endtask

  task automatic do_reset();
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] v;
  int t0;
  initial begin
    for (int i = 0; i < N; i++) core_req[i] = AV_REQ_IDLE;
    // initialisation: safe data into ls_RAM
    @(negedge clk);
    ls_load_we = 1; ls_load_addr = 0; ls_load_data = 32'd1200;
    @(negedge clk); ls_load_addr = 1; ls_load_data = 32'd34;
    @(negedge clk); ls_load_we = 0;
    do_reset();
    chk(sys_state == SYS_BOOT, "system boots");
    @(negedge clk); boot_ok = 1; @(negedge clk); boot_ok = 0;
    chk(sys_state == SYS_NORMAL, "boot checks passed");

    // ---- 1: bus trigger by core 0, 2oo3 ----------------------------------
    ctrl_rd(0, REG_PARTICIPANTS, v);
    chk(v == 3, "default participants");
    ctrl_wr(0, REG_CTRL, 1); n_bus_trigger++;
    wait (irq);
    fork
      isr(1, 0, 0); isr(2, 0, 0); isr(3, 0, 0); isr(4, 0, 0);
      begin app(0, 3); isr(0, 0, 0); end
    join
    chk(acc[1] && acc[2] && acc[3] && !acc[4] && !acc[0], "participants selected");
    if (!acc[4]) n_surplus_reject++;
    if (!acc[0]) n_late_reject++;
    chk(safe_result[1] == 1234 && safe_result[2] == 1234 && safe_result[3] == 1234, "safe result");
    chk(io_log.size() == 1 && io_log[0] == 1234, "one voted write to ls_I/O");
    n_io_write += io_log.size();
    n_release++;
    chk(!lockstep_processing && !irq && !error, "back to normal processing");
    fork app(0, 4); app(1, 4); app(2, 4); join
    dut.u_ls_ram.g_copy[1].mem[0] = 32'hDEAD_BEEF;   // upset in one copy

    // ---- 2: external request, five participants ---------------------------
    ctrl_wr(2, REG_PARTICIPANTS, 5);
    ctrl_rd(2, REG_PARTICIPANTS, v);
    chk(v == 5, "five participants"); n_part_write++;
    @(negedge clk); request_sp = 1;
    wait (irq); n_pin_trigger++;
    @(negedge clk); request_sp = 0;
    io_log.delete();
    fork isr(0, 0, 3); isr(1, 0, 1); isr(2, 0, 5); isr(3, 0, 0); isr(4, 0, 2); join
    chk(acc[0] && acc[1] && acc[2] && acc[3] && acc[4], "all five joined");
    chk(io_log.size() == 1 && !error, "3oo5 run");
    n_io_write += io_log.size(); n_release++;

    // ---- 3: one faulty participant is outvoted ----------------------------
    ctrl_wr(0, REG_PARTICIPANTS, 3);
    ctrl_wr(0, REG_CTRL, 1); n_bus_trigger++;
    io_log.delete();
    wait (irq);
    fork isr(0, 0, 0); isr(1, 32'h1, 0); isr(2, 0, 0); join
    chk(safe_result[0] == 1234 && safe_result[2] == 1234, "majority result");
    chk(io_log.size() == 1 && io_log[0] == 1234, "faulty value never reached ls_I/O");
    chk(safe_result[1] == 0, "outvoted block cut off after release");
    if (safe_result[1] != 1234) n_outvoted++;
    chk(!error && !lockstep_processing, "outvoting is no error");
    chk(nok_count > 0 && sys_state == SYS_NORMAL, "outvoted cycles counted, system back to normal");
    n_nok = int'(nok_count);
    n_release++;

    // ---- 4: no majority ---------------------------------------------------
    ctrl_wr(0, REG_CTRL, 1); n_bus_trigger++;
    wait (irq);
    t0 = 0;
    fork
      isr(0, 0, 0); isr(1, 32'h1, 0); isr(2, 32'h2, 0);
      begin wait (error); end
    join_any
    wait (error);
    chk(error_cause == ERR_NO_MAJORITY, "no majority error");
    @(posedge clk); #1 chk(safe_state, "no majority -> safe state");
    if (error && error_cause == ERR_NO_MAJORITY) n_nomaj_err++;
    ctrl_rd(4, REG_STATUS, v);
    chk(v[3] && v[5:4] == 2'd3, "status shows error");
    disable fork;
    rst_n = 0;
    for (int i = 0; i < N; i++) core_req[i] = AV_REQ_IDLE;
    do_reset();
    @(negedge clk); boot_ok = 1; @(negedge clk); boot_ok = 0;

    // ---- 5: synchronisation time-out --------------------------------------
    ctrl_wr(0, REG_PARTICIPANTS, 5);
    ctrl_wr(0, REG_CTRL, 1); n_bus_trigger++;
    fork
      isr(0, 0, 0); isr(1, 0, 0);
      begin wait (error); end
    join_any
    chk(error_cause == ERR_SYNC_TIME, "sync time-out");
    if (error_cause == ERR_SYNC_TIME) n_sync_timeout++;
    @(posedge clk); #1 chk(safe_state, "time-out -> safe state");
    disable fork;
    rst_n = 0;
    for (int i = 0; i < N; i++) core_req[i] = AV_REQ_IDLE;

    // ---- 6: failed boot checks --------------------------------------------
    do_reset();
    @(negedge clk); boot_nok = 1; @(negedge clk); boot_nok = 0;
    chk(safe_state && !error, "boot_nok -> safe state");
    if (safe_state) n_boot_nok++;

    $display("mechanisms: bus_trigger=%0d pin_trigger=%0d irq=%0d sync_stall=%0d accept=%0d surplus_reject=%0d late_reject=%0d voted_transfers=%0d outvoted=%0d release=%0d arbiter_stall=%0d io_write=%0d participants_write=%0d no_majority_error=%0d sync_timeout=%0d boot_nok=%0d nok_cycles=%0d tmr_corrected=%0d",
             n_bus_trigger, n_pin_trigger, n_irq, n_sync_stall, n_accept, n_surplus_reject, n_late_reject,
             n_voted, n_outvoted, n_release, n_arb_stall, n_io_write, n_part_write, n_nomaj_err, n_sync_timeout, n_boot_nok, n_nok, n_tmr_corrected);
    chk(n_bus_trigger > 0, "mech bus trigger");   chk(n_pin_trigger > 0, "mech pin trigger");
    chk(n_irq > 0, "mech irq");                   chk(n_sync_stall > 0, "mech sync stall");
    chk(n_accept > 0, "mech accept");             chk(n_surplus_reject > 0, "mech surplus reject");
    chk(n_late_reject > 0, "mech late reject");   chk(n_voted > 0, "mech voted transfer");
    chk(n_outvoted > 0, "mech outvoted");         chk(n_release > 0, "mech release");
    chk(n_arb_stall > 0, "mech arbiter stall");   chk(n_io_write > 0, "mech ls_I/O write");
    chk(n_part_write > 0, "mech participants");   chk(n_nomaj_err > 0, "mech no majority");
    chk(n_sync_timeout > 0, "mech sync time-out");
    chk(n_tmr_corrected > 0, "mech TMR correction");
    chk(n_boot_nok > 0, "mech boot_nok");      chk(n_nok > 0, "mech outvoted cycles counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
