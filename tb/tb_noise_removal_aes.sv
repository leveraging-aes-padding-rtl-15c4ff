// tb_noise_removal_aes: a ciphertext from the behavioural AES model is
// corrupted by a random error pattern; feeding the corrupted Y together with
// the same pattern must give back the plaintext, feeding it with no pattern
// (or another one) must not. Checks the 13-cycle latency as well.
module tb_noise_removal_aes;
  import aes_grand_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0, key_load = 0, start = 0;
  block_t key, y, err, pt;
  round_keys_t rk;
  logic key_ready, busy, done;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  aes_key_expand u_keys (.clk, .rst_n, .key_load, .key, .round_keys(rk), .key_ready);
  noise_removal_aes dut (.clk, .rst_n, .round_keys(rk), .start, .y, .err, .busy, .done, .pt);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input block_t yy, input block_t ee, output block_t res, output int lat);
    int unsigned t0;
    @(negedge clk); y = yy; err = ee; start = 1; t0 = cycle + 1;
    @(negedge clk); start = 0; y = '0; err = '0;
    while (!done) @(negedge clk);
    lat = (cycle + 1) - t0;
    res = pt;
  endtask

  initial begin
    block_t p, c, e, e2, r;
    int lat;
    y = '0; err = '0;
    key = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); key_load = 1; @(negedge clk); key_load = 0;
    while (!key_ready) @(negedge clk);
    for (int n = 0; n < 12; n++) begin
      p = {$urandom, $urandom, $urandom, $urandom};
      c = aes128_encrypt(key, p);
      e = '0;
      for (int b = 0; b <= n % 4; b++) e[$urandom_range(127, 0)] = 1'b1;
      e2 = e ^ (128'h1 << $urandom_range(127, 0));
      run(c ^ e, e, r, lat);
      check(r == p, $sformatf("corrected block: %h expected %h", r, p));
      check(lat == 13, $sformatf("latency %0d", lat));
      run(c ^ e, e2, r, lat);
      check(r != p, "a wrong pattern must not give the plaintext");
    end
    run(aes128_encrypt(key, 128'h0), '0, r, lat);
    check(r == 128'h0, "no-error block");
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
