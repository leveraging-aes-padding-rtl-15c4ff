// tb_error_gen: a random permutation as the sorted order and random rank
// patterns (0..8 distinct ranks); the expected error vector sets bit
// order[r-1] for every rank r of the pattern.
module tb_error_gen;
  localparam int N = 128, HW = 8;

  logic [N-1:0][6:0]  order;
  logic [HW-1:0][7:0] parts;
  logic [N-1:0]       err;
  int checks = 0, failures = 0;

  error_gen #(.N(N), .HW_MAX(HW)) dut (.order, .parts, .err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int perm [N];
    int j, tmp, m, r;
    logic [N-1:0] exp_err;
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < N; i++) perm[i] = i;
      for (int i = N - 1; i > 0; i--) begin
        j = $urandom_range(i, 0); tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp;
      end
      for (int i = 0; i < N; i++) order[i] = 7'(perm[i]);
      m = $urandom_range(HW, 0);
      parts = '0; exp_err = '0;
      r = N + 1;
      for (int k = 0; k < m; k++) begin
        r = $urandom_range(r - 1, HW - k);    // strictly decreasing ranks
        parts[k] = 8'(r);
        exp_err[perm[r-1]] = 1'b1;
      end
      #1 check(err == exp_err, $sformatf("case %0d: %h expected %h", n, err, exp_err));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
