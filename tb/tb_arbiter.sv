// Testbench of arbiter: three masters hammer one slave model that stalls
// every transfer for a random number of cycles. Checks that every transfer
// completes with the right data, that no other master's transfer reaches the
// slave while one is stalled, and that simultaneous requests are served in
// round-robin order.
module tb_arbiter;
  import lsm_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  av_req_t m_req [N];
  av_rsp_t m_rsp [N];
  av_req_t s_req;
  av_rsp_t s_rsp;
  int checks = 0, failures = 0;

  arbiter #(.N_PORTS(N)) dut (.*);

  always #5 clk = ~clk;

  // slave model: word memory, each transfer stalled 0..2 cycles
  logic [31:0] mem [64];
  int          stall_left;
  logic        busy;
  av_req_t     held;
  always_comb begin
    s_rsp.readdata    = mem[s_req.address[7:2]];
    s_rsp.waitrequest = (s_req.read || s_req.write) && (!busy || stall_left != 0);
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 0; stall_left <= 0;
    end else if (s_req.read || s_req.write) begin
      if (!busy) begin
        busy <= 1; stall_left <= $urandom_range(0, 2); held <= s_req;
      end else begin
        if (s_req != held) begin
          failures++; $display("FAIL request changed while stalled @%0t", $time);
        end
        if (stall_left != 0) stall_left <= stall_left - 1;
        else begin
          busy <= 0;
          if (s_req.write) mem[s_req.address[7:2]] <= s_req.writedata;
        end
      end
    end
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  int order [$];
  task automatic xfer(int p, logic wr, logic [31:0] a, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    m_req[p] = '{address: a, read: !wr, write: wr, writedata: wd, byteenable: 4'hF};
    #1;
    while (m_rsp[p].waitrequest) begin @(negedge clk); #1; end
    rd = m_rsp[p].readdata;
    order.push_back(p);
    @(posedge clk); #1 m_req[p] = AV_REQ_IDLE;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] r [N];
  initial begin
    for (int i = 0; i < N; i++) m_req[i] = AV_REQ_IDLE;
    repeat (2) @(negedge clk); rst_n = 1;
    // each master writes its own words, all at once, many rounds
    for (int k = 0; k < 20; k++) begin
      order.delete();
      fork
        xfer(0, 1, 32'(4 * (3 * k + 0)), 32'hA000 + 32'(k), r[0]);
        xfer(1, 1, 32'(4 * (3 * k + 1)), 32'hB000 + 32'(k), r[1]);
        xfer(2, 1, 32'(4 * (3 * k + 2)), 32'hC000 + 32'(k), r[2]);
      join
      chk(order.size() == 3 && order[0] != order[1] && order[1] != order[2] && order[0] != order[2], "each served once");
      if (k > 0) chk(order[1] == (order[0] + 1) % 3 && order[2] == (order[1] + 1) % 3, "round robin");
    end
    for (int k = 0; k < 20; k++) begin
      fork
        xfer(0, 0, 32'(4 * (3 * k + 2)), 0, r[0]);
        xfer(1, 0, 32'(4 * (3 * k + 0)), 0, r[1]);
        xfer(2, 0, 32'(4 * (3 * k + 1)), 0, r[2]);
      join
      chk(r[0] == 32'hC000 + 32'(k) && r[1] == 32'hA000 + 32'(k) && r[2] == 32'hB000 + 32'(k), "read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
