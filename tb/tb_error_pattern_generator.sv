// tb_error_pattern_generator: loads random LLR magnitudes and requests
// patterns. The least reliable bits are found by a reference sort in the
// testbench; the first nine error vectors must flip the bits of ranks
// {1}, {2}, {3}, {2,1}, {4}, {3,1}, {5}, {4,1}, {3,2} in that order, with
// logistic weights 1,2,3,3,4,4,5,5,5. With LW_MAX = 6 the generator must then
// give exactly the remaining patterns of weight 6 ({6},{5,1},{4,2},{3,2,1})
// and report exhaustion. A second load restarts at weight 1.
module tb_error_pattern_generator;
  localparam int N = 128, MAG_W = 6;

  logic clk = 0, rst_n = 0, load = 0, enable = 0;
  logic [N-1:0][MAG_W-1:0] mag;
  logic ready, err_valid, exhausted;
  logic [N-1:0] err;
  logic [15:0]  err_lw;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  error_pattern_generator #(.N(N), .MAG_W(MAG_W), .HW_MAX(8), .LW_MAX(6)) dut (
    .clk, .rst_n, .load, .mag, .enable, .ready, .err_valid, .err, .err_lw, .exhausted);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_block();
    int ref_idx [N];
    bit used [N];
    int best, n;
    logic [N-1:0] exp_err;
    int pats [13][3] = '{'{1,0,0}, '{2,0,0}, '{3,0,0}, '{2,1,0}, '{4,0,0}, '{3,1,0},
                         '{5,0,0}, '{4,1,0}, '{3,2,0}, '{6,0,0}, '{5,1,0}, '{4,2,0}, '{3,2,1}};
    int lws [13] = '{1,2,3,3,4,4,5,5,5,6,6,6,6};
    for (int i = 0; i < N; i++) mag[i] = MAG_W'($urandom_range(63, 0));
    for (int i = 0; i < N; i++) used[i] = 0;
    for (int r = 0; r < N; r++) begin
      best = -1;
      for (int i = 0; i < N; i++)
        if (!used[i] && (best < 0 || mag[i] < mag[best])) best = i;
      used[best] = 1;
      ref_idx[r] = best;
    end
    @(negedge clk); load = 1; @(negedge clk); load = 0;
    while (!ready) @(negedge clk);
    n = 0;
    while (!exhausted && n < 20) begin
      enable = 1; @(negedge clk); enable = 0;
      check(err_valid, "err_valid one cycle after enable");
      exp_err = '0;
      if (n < 13) for (int k = 0; k < 3; k++) if (pats[n][k] != 0) exp_err[ref_idx[pats[n][k]-1]] = 1'b1;
      check(n < 13 && err == exp_err, $sformatf("pattern %0d: %h expected %h", n, err, exp_err));
      check(n < 13 && int'(err_lw) == lws[n], $sformatf("pattern %0d weight %0d", n, err_lw));
      n++;
    end
    check(n == 13, $sformatf("%0d patterns before exhaustion, expected 13", n));
    enable = 1; @(negedge clk); enable = 0;
    check(!err_valid, "no pattern after exhaustion");
  endtask

  initial begin
    mag = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_block();
    run_block();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
