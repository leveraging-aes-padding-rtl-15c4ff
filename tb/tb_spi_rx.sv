// tb_spi_rx: an SPI master model (mode 0, MSB first, SCLK = clk/4) sends
// random 40-bit frames; each must appear once on frame/frame_valid. A frame
// cut short by CS_N going high must be discarded, and the next full frame
// must still arrive intact.
module tb_spi_rx;
  localparam int W = 40;

  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0;
  logic frame_valid;
  logic [W-1:0] frame;
  int checks = 0, failures = 0, frames = 0;
  logic [W-1:0] last;

  always #5 clk = ~clk;

  spi_rx #(.FRAME_W(W)) dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .frame_valid, .frame);

  always @(posedge clk) if (frame_valid) begin frames++; last = frame; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [W-1:0] d, input int nbits);
    cs_n = 0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < nbits; i++) begin
      mosi = d[W-1-i];
      repeat (2) @(negedge clk); sclk = 1;
      repeat (2) @(negedge clk); sclk = 0;
    end
    repeat (4) @(negedge clk);
    cs_n = 1;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    logic [W-1:0] d;
    int f0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      d = {$urandom, $urandom};
      f0 = frames;
      if (n == 3) begin
        send(d, W - 5);                     // aborted frame
        check(frames == f0, "partial frame discarded");
        d = {$urandom, $urandom};
      end
      send(d, W);
      check(frames == f0 + 1, "one frame per CS_N period");
      check(last == d, $sformatf("frame %h expected %h", last, d));
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
