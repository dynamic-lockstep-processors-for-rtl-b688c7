// Full-size run of dls_system with every parameter at its default (three
// processing blocks, 4096-word RAMs, default observer limits): ls_RAM is
// loaded, one block triggers safe processing over the control bus, all three
// join (2oo3 voting), run the safe code on ls_RAM and ls_I/O and are
// released; afterwards each block uses system_RAM again. ls_RAM is the
// plain (non-TMR) default, so ls_ram_corrected must stay low.
module tb_dls_system_full;
  import lsm_pkg::*;
  localparam int N = 3;
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
  logic [11:0] ls_load_addr = '0;
  logic [31:0] ls_load_data = '0;
  logic ls_ram_corrected;
  int checks = 0, failures = 0;

  dls_system dut (.*);

  always #5 clk = ~clk;

  logic [31:0] io_log [$];
  assign ls_io_rsp = '{readdata: 32'h0, waitrequest: 1'b0};
  always @(posedge clk) if (ls_io_req.write) io_log.push_back(ls_io_req.writedata);
  logic saw_corrected = 0;
  always @(posedge clk) if (rst_n && ls_ram_corrected) saw_corrected <= 1;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic bus(int p, logic wr, logic [31:0] a, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    core_req[p] = '{address: a, read: !wr, write: wr, writedata: wd, byteenable: 4'hF};
    #1;
    while (core_rsp[p].waitrequest) begin @(negedge clk); #1; end
    rd = core_rsp[p].readdata;
    @(posedge clk); #1 core_req[p] = AV_REQ_IDLE;
  endtask

  logic [31:0] res [N];
  logic        acc [N];
  task automatic isr(int p);
    logic [31:0] d, a, b;
    bus(p, 0, SYNC_ADDRESS, 0, d);
    acc[p] = d[7:0] != 0;
    if (acc[p]) begin
      // sum of the last two words of ls_RAM, stored to word 10 and ls_I/O
      bus(p, 0, LSRAM_BASE + 32'(4 * 4094), 0, a);
      bus(p, 0, LSRAM_BASE + 32'(4 * 4095), 0, b);
      bus(p, 1, LSRAM_BASE + 32'(4 * 10), a + b, d);
      bus(p, 1, LSIO_BASE, a + b, d);
      bus(p, 0, LSRAM_BASE + 32'(4 * 10), 0, res[p]);
      bus(p, 0, SYNC_ADDRESS, 0, d);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  initial begin
    for (int i = 0; i < N; i++) core_req[i] = AV_REQ_IDLE;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); boot_ok = 1; @(negedge clk); boot_ok = 0;
    chk(sys_state == SYS_NORMAL, "normal processing after boot");
    @(negedge clk); ls_load_we = 1; ls_load_addr = 12'd4094; ls_load_data = 32'd40000;
    @(negedge clk); ls_load_addr = 12'd4095; ls_load_data = 32'd2;
    @(negedge clk); ls_load_we = 0;
    bus(0, 1, CTRL_BASE, 1, d);
    wait (irq);
    fork isr(0); isr(1); isr(2); join
    chk(acc[0] && acc[1] && acc[2], "three participants");
    chk(res[0] == 40002 && res[1] == 40002 && res[2] == 40002, "safe result");
    chk(io_log.size() == 1 && io_log[0] == 40002, "one voted ls_I/O write");
    chk(!lockstep_processing && !irq && !error, "released");
    chk(!saw_corrected, "plain ls_RAM reports no correction");
    repeat (2) @(posedge clk); #1 chk(sys_state == SYS_NORMAL && nok_count == 0, "back to normal, nobody outvoted");
    for (int p = 0; p < N; p++) begin
      bus(p, 1, SYSRAM_BASE + 32'(4 * (4095 - p)), 32'(77 + p), d);
      bus(p, 0, SYSRAM_BASE + 32'(4 * (4095 - p)), 0, d);
      chk(d == 32'(77 + p), "system_RAM after lockstep");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
