// tb_aes_decrypt_core: decrypts the FIPS-197 Appendix C.1 example and
// random blocks encrypted by the behavioural AES model, and checks that the
// result is available 13 cycles after start (130 ns at 100 MHz).
module tb_aes_decrypt_core;
  import aes_grand_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0, key_load = 0, start = 0;
  block_t key, din, dout;
  round_keys_t rk;
  logic key_ready, busy, done;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  aes_key_expand u_keys (.clk, .rst_n, .key_load, .key, .round_keys(rk), .key_ready);
  aes_decrypt_core dut (.clk, .rst_n, .round_keys(rk), .start, .din, .busy, .done, .dout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic decrypt(input block_t ct, input block_t exp_pt);
    int unsigned t0;
    @(negedge clk); din = ct; start = 1;
    t0 = cycle + 1;                 // edge that samples start
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    // done is sampled high by the edge after this negedge
    check((cycle + 1) - t0 == 13, $sformatf("latency %0d cycles, expected 13", (cycle + 1) - t0));
    check(dout == exp_pt, $sformatf("pt %h expected %h", dout, exp_pt));
  endtask

  task automatic set_key(input block_t k);
    @(negedge clk); key = k; key_load = 1;
    @(negedge clk); key_load = 0;
    while (!key_ready) @(negedge clk);
  endtask

  initial begin
    block_t k, p;
    din = '0; key = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    set_key(128'h000102030405060708090a0b0c0d0e0f);
    decrypt(128'h69c4e0d86a7b0430d8cdb78070b4c55a, 128'h00112233445566778899aabbccddeeff);
    for (int n = 0; n < 6; n++) begin
      k = {$urandom, $urandom, $urandom, $urandom};
      set_key(k);
      for (int m = 0; m < 4; m++) begin
        p = {$urandom, $urandom, $urandom, $urandom};
        decrypt(aes128_encrypt(k, p), p);
      end
    end
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
