// tb_spi_tx: random frames are handed to the SPI master; a slave model
// samples MOSI on each rising SCLK edge while CS_N is low and must collect
// exactly FRAME_W bits equal to the frame. Also checks ready, the SCLK
// period of 2*DIV clock cycles and that back-to-back frames are all sent.
module tb_spi_tx;
  localparam int W = 36, DIV = 2;

  logic clk = 0, rst_n = 0, valid = 0, ready, sclk, cs_n, mosi;
  logic [W-1:0] data;
  int checks = 0, failures = 0;
  logic [W-1:0] rx_q [$];
  logic [W-1:0] shreg;
  int nbits = 0;
  int unsigned cycle = 0, last_rise = 0, bad_period = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  spi_tx #(.FRAME_W(W), .DIV(DIV)) dut (.clk, .rst_n, .valid, .data, .ready, .sclk, .cs_n, .mosi);

  always @(posedge sclk) if (!cs_n) begin
    if (nbits > 0 && cycle - last_rise != 2 * DIV) bad_period++;
    last_rise = cycle;
    shreg = {shreg[W-2:0], mosi};
    nbits++;
  end
  always @(posedge cs_n) begin
    if (nbits == W) rx_q.push_back(shreg);
    else $display("FAIL: frame of %0d bits", nbits);
    nbits = 0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] sent [$];
    data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      while (!ready) @(negedge clk);
      data = W'({$urandom, $urandom}); valid = 1; sent.push_back(data);
      @(negedge clk); valid = 0;
      check(!ready, "busy while sending");
    end
    while (!ready || !cs_n) @(negedge clk);
    repeat (4) @(negedge clk);
    check(rx_q.size() == 6, $sformatf("%0d frames received", rx_q.size()));
    for (int n = 0; n < rx_q.size() && n < 6; n++)
      check(rx_q[n] == sent[n], $sformatf("frame %0d: %h expected %h", n, rx_q[n], sent[n]));
    check(bad_period == 0, "SCLK period");
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
