// tb_aes_key_expand: checks the AES-128 key schedule against the FIPS-197
// Appendix A.1 example (round keys 0, 1, 2 and 10) and the last round key
// of the Appendix C.1 key, and checks that key_ready rises 10 cycles after
// key_load.
module tb_aes_key_expand;
  import aes_grand_pkg::*;

  logic clk = 0, rst_n = 0, key_load = 0;
  block_t key;
  round_keys_t rk;
  logic key_ready;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_key_expand dut (.clk, .rst_n, .key_load, .key, .round_keys(rk), .key_ready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_key(input block_t k, output int cycles);
    @(negedge clk); key = k; key_load = 1;
    @(negedge clk); key_load = 0;
    cycles = 0;   // edges after the one that sampled key_load
    while (!key_ready) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    key = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_key(128'h2b7e151628aed2a6abf7158809cf4f3c, cyc);
    check(cyc == 10, $sformatf("key_ready after %0d cycles, expected 10", cyc));
    check(rk[0]  == 128'h2b7e151628aed2a6abf7158809cf4f3c, "round key 0");
    check(rk[1]  == 128'ha0fafe1788542cb123a339392a6c7605, "round key 1");
    check(rk[2]  == 128'hf2c295f27a96b9435935807a7359f67f, "round key 2");
    check(rk[10] == 128'hd014f9a8c9ee2589e13f0cc8b6630ca6, "round key 10");
    load_key(128'h000102030405060708090a0b0c0d0e0f, cyc);
    check(rk[10] == 128'h13111d7fe3944a17f307a78b4d2b30c5, "round key 10, key 00..0f");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
