// tb_padding_check: random plaintexts with the right padding, with one
// padding bit flipped and with a flipped payload bit, checked on a 12-bit
// check used at lengths 12 and 8, and on an 8-bit check at length 8. At
// length 8, bits 8..11 belong to the payload and must not matter. The
// expected verdict is computed from how each block was built.
module tb_padding_check;
  import aes_grand_pkg::*;

  block_t      pt12, pt12s, pt8;
  logic [11:0] pad12;
  logic [7:0]  pad8;
  logic        ok12, ok12s, ok8;
  int checks = 0, failures = 0;

  padding_check #(.PAD_BITS(12)) dut12  (.pt(pt12),  .pad_value(pad12), .pad_len(4'd12), .pad_ok(ok12));
  padding_check #(.PAD_BITS(12)) dut12s (.pt(pt12s), .pad_value(pad12), .pad_len(4'd8),  .pad_ok(ok12s));
  padding_check #(.PAD_BITS(8))  dut8   (.pt(pt8),   .pad_value(pad8),  .pad_len(4'd8),  .pad_ok(ok8));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    block_t payload;
    int b;
    for (int n = 0; n < 50; n++) begin
      payload = {$urandom, $urandom, $urandom, $urandom};
      pad12 = 12'($urandom); pad8 = pad12[7:0];
      pt12 = {payload[127:12], pad12}; pt8 = {payload[127:8], pad8}; pt12s = pt8;
      #1 check(ok12 === 1'b1 && ok12s === 1'b1 && ok8 === 1'b1, "right padding accepted");
      b = $urandom_range(11, 0);
      pt12[b] = ~pt12[b]; pt8[b % 8] = ~pt8[b % 8]; pt12s[b % 8] = ~pt12s[b % 8];
      #1 check(ok12 === 1'b0 && ok12s === 1'b0 && ok8 === 1'b0, "flipped padding bit rejected");
      pt12[b] = ~pt12[b]; pt8[b % 8] = ~pt8[b % 8]; pt12s[b % 8] = ~pt12s[b % 8];
      b = $urandom_range(127, 12);
      pt12[b] = ~pt12[b]; pt8[b] = ~pt8[b]; pt12s[b] = ~pt12s[b];
      #1 check(ok12 === 1'b1 && ok12s === 1'b1 && ok8 === 1'b1, "payload bits do not matter");
      b = $urandom_range(11, 8);
      pt12s[b] = ~pt12s[b];
      #1 check(ok12s === 1'b1, "bits above the selected length do not matter");
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
