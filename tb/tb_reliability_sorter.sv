// tb_reliability_sorter: random LLR magnitudes (full range, then only a few
// values so that ties are frequent); the expected order is computed by a
// selection sort on {magnitude, index}. Also checks the log2(N)+1 = 8 cycle
// latency from load to done.
module tb_reliability_sorter;
  localparam int N = 128, MAG_W = 6;

  logic clk = 0, rst_n = 0, load = 0, done;
  logic [N-1:0][MAG_W-1:0] mag;
  logic [N-1:0][6:0]       order;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  reliability_sorter #(.N(N), .MAG_W(MAG_W)) dut (.clk, .rst_n, .load, .mag, .done, .order);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int range);
    int ref_idx [N];
    bit used [N];
    int best, t0;
    for (int i = 0; i < N; i++) mag[i] = MAG_W'($urandom_range(range, 0));
    for (int i = 0; i < N; i++) used[i] = 0;
    for (int r = 0; r < N; r++) begin
      best = -1;
      for (int i = 0; i < N; i++)
        if (!used[i] && (best < 0 || mag[i] < mag[best])) best = i;
      used[best] = 1;
      ref_idx[r] = best;
    end
    @(negedge clk); load = 1; t0 = cycle + 1;
    @(negedge clk); load = 0;
    mag = '0;   // the sorter must have captured the input
    while (!done) @(negedge clk);
    check((cycle + 1) - t0 == 8, $sformatf("latency %0d, expected 8", (cycle + 1) - t0));
    for (int r = 0; r < N; r++)
      check(int'(order[r]) == ref_idx[r], $sformatf("rank %0d: %0d expected %0d", r, order[r], ref_idx[r]));
  endtask

  initial begin
    mag = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5; n++) run(63);
    for (int n = 0; n < 5; n++) run(3);
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
