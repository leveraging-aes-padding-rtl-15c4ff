// tb_grand_ctrl: the controller is surrounded by small models: an input
// FIFO (queue of Y words), a 13-cycle decryption unit whose output is
// Y ^ err ^ C, a padding check that the testbench makes succeed on a chosen
// attempt, and an error pattern generator model that issues pattern j as
// the value j+1 and runs out after a chosen number of patterns.
// For each block it checks: the number of decryptions, that attempt j
// (j >= 2) used pattern j-1, that a retry starts in the very cycle the
// failed result arrives (no idle cycle between guesses once the pattern is
// prefetched), the pushed plaintext and status, abandonment with the
// plaintext of the uncorrected Y, and that nothing is fetched while the key
// is not ready, that a finished block is held while the output FIFOs are
// full, and that queued clean blocks leave back to back, 13 cycles apart. A block needing s decryptions
// must be written out 13*s cycles after it was fetched.
module tb_grand_ctrl;
  import aes_grand_pkg::*;

  localparam block_t C = 128'h0f1e2d3c4b5a69788796a5b4c3d2e1f0;

  logic clk = 0, rst_n = 0;
  logic key_ready = 0, in_empty, in_pop, aes_start, aes_done = 0, pad_ok;
  block_t in_y, aes_y, aes_err, aes_pt, epg_err, out_pt;
  logic epg_load, epg_enable, epg_ready = 0, epg_err_valid = 0, epg_exhausted = 0;
  logic out_full = 0, out_push;
  logic [15:0] out_status;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  grand_ctrl dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- input FIFO model
  block_t in_q [$];
  assign in_empty = (in_q.size() == 0);
  assign in_y     = in_empty ? '0 : in_q[0];
  logic pop_seen = 0;
  always @(posedge clk) pop_seen <= in_pop && !in_empty;
  always @(negedge clk) if (pop_seen) void'(in_q.pop_front());

  // ---- decryption model
  int     success_at;      // attempt that gets the right padding, 0 = never
  int     attempts;
  block_t used_err [$];
  int     busy_cnt = 0;
  int     late_retries = 0;
  block_t res;
  assign aes_pt = res;
  assign pad_ok = (attempts == success_at);
  always @(posedge clk) begin
    aes_done <= 1'b0;
    if (busy_cnt > 0) begin
      busy_cnt <= busy_cnt - 1;
      if (busy_cnt == 1) aes_done <= 1'b1;
    end
    if (aes_start && rst_n) begin
      if (busy_cnt != 0) begin failures++; $display("FAIL: start while busy"); end
      attempts <= attempts + 1;
      used_err.push_back(aes_err);
      res      <= aes_y ^ aes_err ^ C;
      busy_cnt <= 12;
      if (attempts > 0 && !aes_done) late_retries++;
    end
  end

  // ---- error pattern generator model
  int n_patterns, issued, sort_wait;
  always @(posedge clk) begin
    epg_err_valid <= 1'b0;
    if (epg_load) begin
      issued <= 0; sort_wait <= 8; epg_ready <= 1'b0; epg_exhausted <= (n_patterns == 0);
    end else begin
      if (sort_wait > 1) sort_wait <= sort_wait - 1;
      else if (sort_wait == 1) begin sort_wait <= 0; epg_ready <= 1'b1; end
      if (epg_enable) begin
        if (!epg_ready || epg_exhausted) begin failures++; $display("FAIL: enable not allowed"); end
        epg_err_valid <= 1'b1;
        epg_err       <= block_t'(issued + 1);
        issued        <= issued + 1;
        if (issued + 1 == n_patterns) epg_exhausted <= 1'b1;
      end
    end
  end

  // ---- output capture
  block_t      got_pt [$];
  logic [15:0] got_st [$];
  int pushes_while_full = 0;
  int unsigned pop_cycle, push_cycle;
  always @(posedge clk) if (in_pop && rst_n) pop_cycle = cycle;
  int unsigned push_hist [$];
  always @(posedge clk) if (out_push && rst_n) begin push_cycle = cycle; push_hist.push_back(cycle); end
  always @(posedge clk) if (out_push && rst_n) begin
    got_pt.push_back(out_pt); got_st.push_back(out_status);
  end

  task automatic run_block(input int succ, input int npat);
    block_t y;
    int t0;
    y = {$urandom, $urandom, $urandom, $urandom};
    success_at = succ; n_patterns = npat;
    attempts = 0; used_err.delete(); got_pt.delete(); got_st.delete(); late_retries = 0;
    in_q.push_back(y);
    t0 = cycle;
    while (got_pt.size() == 0 && cycle - t0 < 20000) @(negedge clk);
    repeat (3) @(negedge clk);
    check(got_pt.size() == 1, "exactly one output per block");
    if (succ > 0 && succ <= npat + 1) begin
      check(attempts == succ, $sformatf("%0d decryptions, expected %0d", attempts, succ));
      check(got_pt[0] == (y ^ used_err[succ-1] ^ C), "decoded plaintext");
      check(got_st[0] == {1'b0, 15'(succ)}, $sformatf("status %h", got_st[0]));
    end else begin
      check(attempts == npat + 1, $sformatf("%0d decryptions before giving up, expected %0d", attempts, npat + 1));
      check(got_pt[0] == (y ^ C), "abandoned block carries the uncorrected plaintext");
      check(got_st[0] == {1'b1, 15'(npat + 1)}, $sformatf("fail status %h", got_st[0]));
    end
    check(used_err[0] == '0, "first attempt uses no error pattern");
    if (succ == 1)
      check(push_cycle - pop_cycle == 13, $sformatf("clean block: fetch to output %0d cycles, expected 13", push_cycle - pop_cycle));
    else if (succ > 1 && succ <= npat + 1)
      check(push_cycle - pop_cycle == 13 * succ, $sformatf("%0d attempts took %0d cycles, expected %0d", succ, push_cycle - pop_cycle, 13 * succ));
    for (int j = 1; j < used_err.size(); j++)
      check(used_err[j] == block_t'(j), $sformatf("attempt %0d used pattern %0d", j + 1, used_err[j]));
    check(late_retries == 0, "retries start in the cycle of the failed check");
  endtask

  initial begin
    block_t y;
    attempts = 0; success_at = 1; n_patterns = 10; res = '0; epg_err = '0;
    issued = 0; sort_wait = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // no fetch before the key is ready
    y = {$urandom, $urandom, $urandom, $urandom};
    in_q.push_back(y);
    repeat (20) @(negedge clk);
    check(in_q.size() == 1, "no fetch while key not ready");
    key_ready = 1;
    repeat (30) @(negedge clk);
    check(in_q.size() == 0 && got_pt.size() == 1 && got_pt[0] == (y ^ C), "block decoded once key ready");
    run_block(1, 10);           // clean block
    run_block(2, 10);           // first pattern corrects it
    run_block(7, 10);
    run_block(11, 10);          // last pattern corrects it
    run_block(0, 5);            // abandoned
    run_block(0, 0);            // no patterns at all
    // output FIFOs full: the block is decoded but held until there is room
    out_full = 1;
    success_at = 1; attempts = 0; got_pt.delete();
    in_q.push_back(y);
    repeat (30) @(negedge clk);
    check(in_q.size() == 0 && got_pt.size() == 0, "block held while output FIFOs full");
    out_full = 0;
    @(negedge clk);
    check(got_pt.size() == 1 && got_pt[0] == (y ^ C), "held block written once there is room");
    // back to back: three clean blocks leave 13 cycles apart
    begin
      int unsigned t [$];
      success_at = 1; attempts = 0; got_pt.delete();
      in_q.push_back(y); in_q.push_back(~y); in_q.push_back(y ^ C);
      repeat (60) @(negedge clk);
      check(got_pt.size() == 3, "three queued blocks decoded");
      check(push_hist.size() >= 3 && push_hist[$] - push_hist[$-1] == 13 && push_hist[$-1] - push_hist[$-2] == 13,
            "queued blocks leave one every 13 cycles");
    end
    for (int n = 0; n < 10; n++) run_block($urandom_range(12, 1), $urandom_range(12, 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
