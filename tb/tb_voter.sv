// Testbench of voter: three lockstep inputs against a small RAM-like slave
// model; unanimous transfers, one faulty input outvoted, no majority.
module tb_voter;
  import lsm_pkg::*;
  localparam int N = 3;
  av_req_t plsb_req [N];
  av_rsp_t plsb_rsp [N];
  logic [N-1:0] enabled;
  av_req_t lsb_req;
  av_rsp_t lsb_rsp;
  logic no_majority;
  logic [N-1:0] dissent;
  int checks = 0, failures = 0;

  voter #(.N_PORTS(N)) dut (.*);

  // slave: answers reads with ~address at once
  always_comb begin
    lsb_rsp.waitrequest = 1'b0;
    lsb_rsp.readdata    = lsb_req.read ? ~lsb_req.address : 32'h0;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic av_req_t rd(logic [31:0] a);
    return '{address: a, read: 1'b1, write: 1'b0, writedata: 32'h0, byteenable: 4'hF};
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enabled = 3'b111;
    for (int t = 0; t < 200; t++) begin
      logic [31:0] a;
      int bad;
      a = 32'($urandom) & 32'hFFFC;
      bad = $urandom_range(0, 3);  // 3 = nobody faulty
      for (int i = 0; i < N; i++) plsb_req[i] = rd(a);
      if (bad < 3) plsb_req[bad].address = a ^ 32'h4;
      #1;
      chk(lsb_req.read && lsb_req.address == a, "majority forwarded");
      chk(!no_majority, "majority present");
      if (bad == 3) chk(dissent == '0, "no dissent");
      for (int i = 0; i < N; i++)
        if (i == bad) chk(plsb_rsp[i].waitrequest && dissent == 3'(1 << i), "faulty stalled and reported");
        else          chk(!plsb_rsp[i].waitrequest && plsb_rsp[i].readdata == ~a, "good answered");
    end
    plsb_req[0] = rd(32'h10); plsb_req[1] = rd(32'h20); plsb_req[2] = rd(32'h30); #1;
    chk(no_majority && dissent == '0, "three different");
    chk(!lsb_req.read && !lsb_req.write, "lsb idle");
    enabled = 3'b000; #1;
    chk(!no_majority, "nothing enabled");
    chk(!plsb_rsp[1].waitrequest && plsb_rsp[1].readdata == 0, "outside lockstep answered with 0");
    chk(!lsb_req.read, "no access outside lockstep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
