// Testbench of ls_ram: fill through the load port as at system start, read
// back over the bus (one wait state), byte writes over the bus, and a load
// colliding with a bus write to the same word (load wins). A second instance
// with the triple-modular-redundant option runs on the same inputs and must
// answer identically; at the end single copies of it are corrupted through
// hierarchical writes, and each read must still return the stored word and
// raise `corrected` with the data, while reads of clean words must not.
module tb_ls_ram;
  import lsm_pkg::*;
  localparam int W = 128;
  logic clk = 0, rst_n = 0;
  av_req_t req = AV_REQ_IDLE;
  av_rsp_t rsp;
  logic load_we = 0;
  logic [6:0] load_addr = '0;
  logic [31:0] load_data = '0;
  int checks = 0, failures = 0;
  logic [31:0] model [W];
  logic cor_t;

  av_rsp_t rsp_t;
  logic corrected, corrected_t;

  ls_ram #(.WORDS(W)) dut (.*);
  ls_ram #(.WORDS(W), .TMR(1'b1)) dut_t (
    .clk, .rst_n, .req, .rsp(rsp_t), .load_we, .load_addr, .load_data,
    .corrected(corrected_t)
  );

  always #5 clk = ~clk;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic xfer(logic wr, int a, logic [31:0] wd, logic [3:0] be, output logic [31:0] rd, output int waits);
    @(negedge clk);
    req = '{address: LSRAM_BASE + 32'(4 * a), read: !wr, write: wr, writedata: wd, byteenable: be};
    waits = 0; #1;
    while (rsp.waitrequest) begin @(negedge clk); #1; waits++; end
    rd = rsp.readdata;
    chk(rsp_t.waitrequest == rsp.waitrequest && rsp_t.readdata == rsp.readdata,
        "TMR copy answers like the plain RAM");
    chk(!corrected, "plain RAM never reports a correction");
    cor_t = corrected_t;
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
      model[a] = 32'h5AFE_0000 + 32'(a * 3);
      @(negedge clk); load_we = 1; load_addr = 7'(a); load_data = model[a];
    end
    @(negedge clk); load_we = 0;
    for (int a = 0; a < W; a++) begin
      xfer(0, a, 0, 4'hF, d, w);
      chk(d == model[a] && w == 1, "loaded word read back");
    end
    for (int t = 0; t < 200; t++) begin
      int a; logic [31:0] v; logic [3:0] be;
      a = $urandom_range(0, W - 1); v = $urandom; be = 4'($urandom);
      xfer(1, a, v, be, d, w);
      chk(w == 0, "write without wait");
      for (int b = 0; b < 4; b++) if (be[b]) model[a][8*b +: 8] = v[8*b +: 8];
      xfer(0, a, 0, 4'hF, d, w);
      chk(d == model[a], "byte write");
    end
    // collision: load and bus write to word 5 in the same cycle
    @(negedge clk);
    load_we = 1; load_addr = 7'd5; load_data = 32'h1111_1111;
    req = '{address: LSRAM_BASE + 32'd20, read: 1'b0, write: 1'b1, writedata: 32'h2222_2222, byteenable: 4'hF};
    @(posedge clk); #1 load_we = 0; req = AV_REQ_IDLE;
    xfer(0, 5, 0, 4'hF, d, w);
    chk(d == 32'h1111_1111, "load has priority");
    model[5] = 32'h1111_1111;
    // TMR: corrupt one copy at a time, the vote must mask it
    for (int t = 0; t < 30; t++) begin
      int a, c; logic [31:0] flip;
      a = $urandom_range(0, W - 1); c = t % 3; flip = $urandom | 32'h1;
      xfer(0, a, 0, 4'hF, d, w);
      chk(!cor_t, "clean word read without correction");
      case (c)
        0: dut_t.g_copy[0].mem[a] = model[a] ^ flip;
        1: dut_t.g_copy[1].mem[a] = model[a] ^ flip;
        default: dut_t.g_copy[2].mem[a] = model[a] ^ flip;
      endcase
      xfer(0, a, 0, 4'hF, d, w);
      chk(rsp_t.readdata == model[a] && cor_t, "corrupted copy outvoted");
      xfer(1, a, model[a], 4'hF, d, w);
      xfer(0, a, 0, 4'hF, d, w);
      chk(!cor_t, "rewrite repairs the copy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
