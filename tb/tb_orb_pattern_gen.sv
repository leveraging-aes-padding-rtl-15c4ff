// tb_orb_pattern_gen: with N = 16, HW_MAX = 4, LW_MAX = 24 every pattern
// the generator produces is checked to be a set of distinct ranks in 1..N,
// at most HW_MAX of them, summing to the reported logistic weight, with the
// weight never decreasing and no pattern repeated. The number of patterns
// of each weight is compared with a count over all subsets of {1..16}, so
// none is missing. The first patterns are also checked one by one against
// the ORBGRAND order {1}, {2}, {3}, {2,1}, {4}, {3,1}, {5}, {4,1}, {3,2}.
module tb_orb_pattern_gen;
  localparam int N = 16, HW = 4, LWM = 24;

  logic clk = 0, rst_n = 0, init = 0, next = 0, exhausted;
  logic [HW-1:0][4:0] parts;
  logic [2:0]  num_parts;
  logic [15:0] lw;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  orb_pattern_gen #(.N(N), .HW_MAX(HW), .LW_MAX(LWM)) dut (
    .clk, .rst_n, .init, .next, .parts, .num_parts, .lw, .exhausted);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int ref_cnt [LWM+1];
    int got_cnt [LWM+1];
    bit seen [int];
    int first [9][2] = '{'{1,0}, '{2,0}, '{3,0}, '{2,1}, '{4,0}, '{3,1}, '{5,0}, '{4,1}, '{3,2}};
    int sum, cnt, prev_lw, n, mask;
    bit ok;
    for (int w = 0; w <= LWM; w++) begin ref_cnt[w] = 0; got_cnt[w] = 0; end
    for (int s = 1; s < (1 << N); s++) begin
      sum = 0; cnt = 0;
      for (int b = 0; b < N; b++) if (s[b]) begin sum += b + 1; cnt++; end
      if (cnt <= HW && sum <= LWM) ref_cnt[sum]++;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    prev_lw = 0; n = 0;
    while (!exhausted) begin
      sum = 0; mask = 0; ok = 1;
      for (int k = 0; k < HW; k++) begin
        if (parts[k] != 0) begin
          if (parts[k] > N) ok = 0;
          if (k > 0 && parts[k] >= parts[k-1]) ok = 0;
          sum += int'(parts[k]);
          mask |= 1 << (parts[k] - 1);
        end else if (k + 1 < HW && parts[k+1] != 0) ok = 0;
      end
      check(ok, $sformatf("pattern %0d not distinct/descending", n));
      check(sum == int'(lw), $sformatf("pattern %0d sums to %0d, lw %0d", n, sum, lw));
      check(int'(lw) >= prev_lw, "logistic weight decreased");
      check(!seen.exists(mask), $sformatf("pattern %0d repeated", n));
      seen[mask] = 1;
      if (n < 9)
        check(parts[0] == 5'(first[n][0]) && parts[1] == 5'(first[n][1]) && parts[2] == 0,
              $sformatf("pattern %0d is {%0d,%0d}", n, parts[0], parts[1]));
      if (int'(lw) <= LWM) got_cnt[lw]++;
      prev_lw = int'(lw);
      n++;
      next = 1; @(negedge clk); next = 0;
    end
    for (int w = 1; w <= LWM; w++)
      check(got_cnt[w] == ref_cnt[w], $sformatf("weight %0d: %0d patterns, expected %0d", w, got_cnt[w], ref_cnt[w]));
    $display("patterns generated: %0d", n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
