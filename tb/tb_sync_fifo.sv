// tb_sync_fifo: random pushes and pops against a queue model, including
// pushes when full and pops when empty (both must be ignored); checks data
// order and the full/empty flags every cycle.
module tb_sync_fifo;
  localparam int W = 16, D = 4;

  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  int fulls = 0, empties = 0;

  always #5 clk = ~clk;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .wdata, .pop, .rdata, .full, .empty);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] q [$];
    wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      check(full == (q.size() == D), "full flag");
      check(empty == (q.size() == 0), "empty flag");
      if (q.size() > 0) check(rdata == q[0], $sformatf("rdata %h expected %h", rdata, q[0]));
      if (full) fulls++;
      if (empty) empties++;
      push = ($urandom_range(99, 0) < ((n / 100) % 2 ? 70 : 30));
      pop  = ($urandom_range(99, 0) < ((n / 100) % 2 ? 30 : 70));
      wdata = W'($urandom);
      begin
        bit push_ok, pop_ok;
        logic [W-1:0] d;
        push_ok = push && (q.size() < D);
        pop_ok  = pop && (q.size() > 0);
        d = wdata;
        @(posedge clk);
        if (pop_ok)  void'(q.pop_front());
        if (push_ok) q.push_back(d);
      end
    end
    check(fulls > 0 && empties > 0, "both full and empty were reached");
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
