// Testbench of bus_multiplexer: forwarding of the selected request, response
// to agreeing inputs, stall of dissenters, immediate zero answer to inputs
// that are not enabled, idle lsb without a selection.
module tb_bus_multiplexer;
  import lsm_pkg::*;
  localparam int N = 3;
  av_req_t plsb_req [N];
  av_rsp_t plsb_rsp [N];
  logic [N-1:0] enabled, agree;
  logic sel_valid;
  logic [1:0] sel_idx;
  av_req_t lsb_req;
  av_rsp_t lsb_rsp;
  int checks = 0, failures = 0;

  bus_multiplexer #(.N_PORTS(N)) dut (.*);

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++)
      plsb_req[i] = '{address: 32'h100 + 32'(i), read: 1'b1, write: 1'b0, writedata: 32'(i), byteenable: 4'hF};
    lsb_rsp = '{readdata: 32'hCAFE_0001, waitrequest: 1'b0};
    for (int s = 0; s < N; s++) begin
      enabled = 3'b111; sel_valid = 1; sel_idx = 2'(s); agree = 3'b111 & ~(3'b1 << ((s + 1) % N));
      #1;
      chk(lsb_req == plsb_req[s], "forward selected");
      for (int i = 0; i < N; i++) begin
        if (agree[i]) chk(plsb_rsp[i].readdata == 32'hCAFE_0001 && !plsb_rsp[i].waitrequest, "agree rsp");
        else          chk(plsb_rsp[i].waitrequest, "dissenter stalled");
      end
    end
    lsb_rsp.waitrequest = 1; #1;
    chk(plsb_rsp[0].waitrequest && plsb_rsp[1].waitrequest, "slave stall passed on");
    sel_valid = 0; #1;
    chk(!lsb_req.read && !lsb_req.write, "idle without selection");
    chk(plsb_rsp[0].waitrequest && plsb_rsp[1].waitrequest && plsb_rsp[2].waitrequest, "all stalled");
    enabled = 3'b011; sel_valid = 1; sel_idx = 0; agree = 3'b011; lsb_rsp.waitrequest = 0; #1;
    chk(!plsb_rsp[2].waitrequest && plsb_rsp[2].readdata == 0, "not enabled answered with 0");
    chk(lsb_req.address == 32'h100, "port 0 forwarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
