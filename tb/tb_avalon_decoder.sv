// Testbench of avalon_decoder with the default four-window map: each window
// reaches only its slave, responses come back from the selected slave only,
// unmapped addresses are answered at once with zero.
module tb_avalon_decoder;
  import lsm_pkg::*;
  av_req_t m_req;
  av_rsp_t m_rsp;
  av_req_t s_req [4];
  av_rsp_t s_rsp [4];
  int checks = 0, failures = 0;

  avalon_decoder #(.N_SLAVES(4)) dut (.*);

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

  logic [31:0] addrs [5] = '{32'h0000_0040, 32'h0001_8004, 32'h0002_0000, 32'h0002_0108, 32'h0003_0000};
  initial begin
    for (int k = 0; k < 4; k++) s_rsp[k] = '{readdata: 32'hD000 + 32'(k), waitrequest: (k == 1)};
    for (int t = 0; t < 5; t++) begin
      m_req = '{address: addrs[t], read: 1'b1, write: 1'b0, writedata: 0, byteenable: 4'hF};
      #1;
      for (int k = 0; k < 4; k++)
        chk(s_req[k].read == (k == t) && (k != t || s_req[k].address == addrs[t]), "routing");
      if (t < 4) chk(m_rsp.readdata == 32'hD000 + 32'(t) && m_rsp.waitrequest == (t == 1), "response");
      else       chk(m_rsp.readdata == 0 && !m_rsp.waitrequest, "unmapped");
    end
    m_req.read = 0; m_req.write = 1; m_req.address = 32'h0002_0104; #1;
    chk(s_req[3].write && !s_req[0].write && !s_req[1].write && !s_req[2].write, "write routing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
