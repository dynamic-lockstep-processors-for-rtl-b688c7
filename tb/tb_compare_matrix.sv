// Testbench of compare_matrix: random requests drawn from small value sets so
// that equal and unequal pairs are both frequent; the expected matrix is
// computed field by field in the testbench.
module tb_compare_matrix;
  import lsm_pkg::*;
  localparam int N = 4;
  av_req_t               req   [N];
  logic    [N-1:0]       equal [N];
  int checks = 0, failures = 0;

  compare_matrix #(.N_PORTS(N)) dut (.req(req), .equal(equal));

  function automatic logic ref_eq(av_req_t a, av_req_t b);
    if (!(a.read | a.write) && !(b.read | b.write)) return 1;
    if (a.read != b.read || a.write != b.write) return 0;
    if (a.address != b.address || a.byteenable != b.byteenable) return 0;
    if (a.write && a.writedata != b.writedata) return 0;
    return 1;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_eq = 0, n_ne = 0;
  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++) begin
        logic [1:0] op;
        op = 2'($urandom_range(0, 2));
        req[i].read       = (op == 1);
        req[i].write      = (op == 2);
        req[i].address    = 32'($urandom_range(0, 1)) << 2;
        req[i].writedata  = 32'($urandom_range(0, 1));
        req[i].byteenable = ($urandom_range(0, 7) == 0) ? 4'h3 : 4'hF;
      end
      #1;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          logic e;
          e = (i == j) ? 1'b1 : ref_eq(req[i], req[j]);
          checks++;
          if (equal[i][j] !== e) begin
            failures++;
            if (failures < 5) $display("mismatch t=%0d i=%0d j=%0d got %b exp %b", t, i, j, equal[i][j], e);
          end
          if (i != j) begin if (e) n_eq++; else n_ne++; end
        end
    end
    // an idle port with stray address lines equals another idle port
    req[0] = '{address: 32'h10, read: 0, write: 0, writedata: 32'h5, byteenable: 4'h1};
    req[1] = '{address: 32'h20, read: 0, write: 0, writedata: 32'h6, byteenable: 4'hF};
    #1; checks++; if (!equal[0][1]) failures++;
    // reads ignore writedata
    req[0].read = 1; req[1].read = 1; req[1].address = 32'h10; req[1].byteenable = 4'h1;
    #1; checks++; if (!equal[0][1]) failures++;
    if (n_eq == 0 || n_ne == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
