// Testbench of system_ram: random writes with byte enables against a
// reference array, read-back, one wait state per read, none per write.
module tb_system_ram;
  import lsm_pkg::*;
  localparam int W = 256;
  logic clk = 0, rst_n = 0;
  av_req_t req = AV_REQ_IDLE;
  av_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [31:0] model [W];

  system_ram #(.WORDS(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic xfer(logic wr, int a, logic [31:0] wd, logic [3:0] be, output logic [31:0] rd, output int waits);
    @(negedge clk);
    req = '{address: 32'(4 * a), read: !wr, write: wr, writedata: wd, byteenable: be};
    waits = 0; #1;
    while (rsp.waitrequest) begin @(negedge clk); #1; waits++; end
    rd = rsp.readdata;
    @(posedge clk); #1 req = AV_REQ_IDLE;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d; int w;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < W; a++) begin
      model[a] = $urandom;
      xfer(1, a, model[a], 4'hF, d, w);
      chk(w == 0, "write without wait");
    end
    for (int t = 0; t < 500; t++) begin
      int a; logic [31:0] v; logic [3:0] be;
      a = $urandom_range(0, W - 1); v = $urandom; be = 4'($urandom);
      if ($urandom_range(0, 1) == 1) begin
        xfer(1, a, v, be, d, w);
        for (int b = 0; b < 4; b++) if (be[b]) model[a][8*b +: 8] = v[8*b +: 8];
      end else begin
        xfer(0, a, 0, 4'hF, d, w);
        chk(d == model[a], "read data");
        chk(w == 1, "one wait state per read");
      end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
