// Testbench of majority_voter: each input gets a random "value class"; inputs
// of the same class compare equal. The expected choice is derived from class
// counts among the enabled inputs (majority = more than half).
module tb_majority_voter;
  localparam int N = 5;
  localparam int IW = $clog2(N);
  logic [N-1:0] equal [N];
  logic [N-1:0] enabled, agree;
  logic         sel_valid, no_majority;
  logic [IW-1:0] sel_idx;
  int checks = 0, failures = 0;
  int cls [N];
  int n_valid = 0, n_nomaj = 0;

  majority_voter #(.N_PORTS(N)) dut (.*);

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int n_en, cnt, exp_idx;
      logic exp_valid;
      logic [N-1:0] exp_agree;
      for (int i = 0; i < N; i++) cls[i] = $urandom_range(0, 2);
      enabled = N'($urandom);
      if (t % 4 == 0) enabled = 5'b10101;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) equal[i][j] = (cls[i] == cls[j]);
      #1;
      n_en = $countones(enabled);
      exp_valid = 0; exp_idx = 0; exp_agree = '0;
      for (int i = 0; i < N && !exp_valid; i++) begin
        cnt = 0;
        for (int j = 0; j < N; j++) if (enabled[j] && cls[j] == cls[i]) cnt++;
        if (enabled[i] && 2 * cnt > n_en) begin
          exp_valid = 1; exp_idx = i;
          for (int j = 0; j < N; j++) exp_agree[j] = enabled[j] && cls[j] == cls[i];
        end
      end
      chk(sel_valid == exp_valid, "sel_valid");
      if (exp_valid) begin
        chk(sel_idx == IW'(exp_idx), "sel_idx");
        chk(agree == exp_agree, "agree");
        n_valid++;
      end
      chk(no_majority == (n_en != 0 && !exp_valid), "no_majority");
      if (no_majority) n_nomaj++;
    end
    chk(n_valid > 100 && n_nomaj > 100, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
