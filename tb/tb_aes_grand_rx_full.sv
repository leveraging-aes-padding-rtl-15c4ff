// tb_aes_grand_rx_full: the receiver with every parameter at its default
// (12 padding bits, LW_MAX = 64, HW_MAX = 8, FIFO depths 4) taken through
// complete operation over its SPI ports: frames queued before the key is
// loaded (the fifth overflows the input FIFOs), clean blocks decoded in 13
// cycles from fetch to output and, when queued, one every 13 cycles, blocks with a few unreliable bit errors
// corrected, and blocks sent through a BPSK/AWGN channel at Eb/N0 = 7 dB.
// Every decoded frame is compared with the transmitted plaintext; an AWGN
// block may at worst be abandoned or accepted as another block with the
// right padding, which is counted, and at least 6 of the 8 must decode.
module tb_aes_grand_rx_full;
  import aes_grand_pkg::*;
  import aes_ref_pkg::*;
  import rx_channel_pkg::*;

  localparam int PAD_BITS = 12;
  localparam int OUT_W = 144;

  logic clk = 0, rst_n = 0, key_load = 0;
  block_t key;
  logic [PAD_BITS-1:0] pad_value;
  logic sclk_i = 0, cs_n_i = 1, mosi_i = 0;
  logic sclk_o, cs_n_o, mosi_o, rx_overflow;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  aes_grand_rx dut (
    .clk, .rst_n, .key_load, .key, .pad_value, .pad_len($clog2(PAD_BITS+1)'(PAD_BITS)),
    .spi_in_sclk(sclk_i), .spi_in_cs_n(cs_n_i), .spi_in_mosi(mosi_i),
    .spi_out_sclk(sclk_o), .spi_out_cs_n(cs_n_o), .spi_out_mosi(mosi_o), .rx_overflow);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- SPI slave model on the output
  logic [OUT_W-1:0] rx_frames [$];
  logic [OUT_W-1:0] sh;
  int nb = 0;
  always @(posedge sclk_o) if (!cs_n_o) begin sh = {sh[OUT_W-2:0], mosi_o}; nb++; end
  always @(posedge cs_n_o) begin
    if (nb == OUT_W) rx_frames.push_back(sh);
    else if (rst_n) $display("FAIL: output frame of %0d bits", nb);
    nb = 0;
  end

  // ---- SPI master model on the input (SCLK = clk/4)
  task automatic send_frame(input logic [FRAME_W-1:0] f);
    cs_n_i = 0;
    repeat (2) @(negedge clk);
    for (int i = FRAME_W - 1; i >= 0; i--) begin
      mosi_i = f[i];
      repeat (2) @(negedge clk); sclk_i = 1;
      repeat (2) @(negedge clk); sclk_i = 0;
    end
    repeat (2) @(negedge clk);
    cs_n_i = 1;
    repeat (4) @(negedge clk);
  endtask

  // ---- mechanism counters
  int n_false = 0, n_awgn_ok = 0, n_awgn_err = 0;
  int n_clean = 0, n_corrected = 0, n_abandoned = 0, n_overflow = 0, n_stall = 0;
  int unsigned pop_cycle;
  int lat_bad = 0, lat_seen = 0;
  int unsigned last_push = 0;
  int n_b2b = 0;                       // outputs 13 cycles after the previous one
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.out_push) begin
      if (cycle - last_push == 13) n_b2b++;
      last_push = cycle;
    end
    if (dut.u_ctrl.out_push && dut.u_ctrl.finish && dut.u_ctrl.out_status == 16'd1) begin
      lat_seen++;
      if (cycle - pop_cycle != 13) lat_bad++;
    end
    if (dut.u_ctrl.in_pop) pop_cycle = cycle;
    if (dut.u_ctrl.state_q == 3)
      n_stall++;
  end

  tx_block_t sent [$];

  task automatic send_block(input channel_e ch, input int nflip, input bit expect_drop = 0);
    tx_block_t b;
    b = make_block(key, PAD_BITS, 16'(pad_value), ch, nflip, 7.0);
    send_frame(frame_of(b));
    if (!expect_drop) sent.push_back(b);
  endtask

  task automatic compare_all();
    tx_block_t b;
    logic [15:0] st;
    logic [127:0] pt;
    int t0;
    t0 = cycle;
    while (rx_frames.size() < sent.size() && cycle - t0 < 200000) @(negedge clk);
    check(rx_frames.size() == sent.size(), $sformatf("%0d frames out, %0d expected", rx_frames.size(), sent.size()));
    while (sent.size() > 0 && rx_frames.size() > 0) begin
      b = sent.pop_front();
      {st, pt} = rx_frames.pop_front();
      if (b.nerr == 0) begin
        check(st == 16'd1 && pt == b.payload_block, $sformatf("clean block: status %h", st));
        if (st == 16'd1) n_clean++;
        if (b.ch == CH_AWGN) n_awgn_ok++;
      end else if (!st[15] && b.ch == CH_AWGN && pt != b.payload_block) begin
        check(pt[PAD_BITS-1:0] == pad_value, "accepted block has the right padding");
        n_awgn_err++;
      end else if (!st[15] && b.ch == CH_STRONG) begin
        // a wrong codeword with the right padding found before the limit
        check(pt[PAD_BITS-1:0] == pad_value, "accepted block has the right padding");
        n_false++;
      end else if (!st[15]) begin
        check(pt == b.payload_block, $sformatf("corrected block (%0d errors, %0d guesses) wrong", b.nerr, st[14:0]));
        check(st[14:0] > 1, "a corrupted block needs more than one decryption");
        if (pt == b.payload_block) n_corrected++;
        if (b.ch == CH_AWGN && pt == b.payload_block) n_awgn_ok++;
      end else begin
        check(b.ch == CH_STRONG || b.ch == CH_AWGN, $sformatf("block with %0d unreliable errors abandoned", b.nerr));
        check(pt != b.payload_block, "abandoned block is not the plaintext");
        n_abandoned++;
      end
    end
  endtask

  initial begin
    key = {$urandom, $urandom, $urandom, $urandom};
    pad_value = 12'h400;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // frames before the key: four are queued, the fifth is dropped
    for (int n = 0; n < 4; n++) send_block(CH_CLEAN, 0);
    check(!rx_overflow, "no overflow with four frames queued");
    send_block(CH_CLEAN, 0, 1);
    check(rx_overflow, "fifth frame overflows the input FIFOs");
    if (rx_overflow) n_overflow++;
    @(negedge clk); key_load = 1; @(negedge clk); key_load = 0;
    compare_all();
    // the four queued clean blocks leave one every 13 cycles: 116 payload
    // bits per 130 ns at 100 MHz
    check(n_b2b == 3, $sformatf("queued blocks back to back: %0d of 3 gaps are 13 cycles", n_b2b));
    // corrected blocks and blocks through an AWGN channel at Eb/N0 = 7 dB
    for (int n = 0; n < 4; n++) send_block(CH_FLIPS, 1 + n % 3);
    for (int n = 0; n < 8; n++) send_block(CH_AWGN, 0);
    compare_all();
    check(lat_seen > 0 && lat_bad == 0, $sformatf("clean-block latency: %0d of %0d not 13 cycles", lat_bad, lat_seen));
    $display("mechanisms: clean=%0d corrected=%0d overflow=%0d out_stall_cycles=%0d awgn_ok=%0d awgn_wrong=%0d",
             n_clean, n_corrected, n_overflow, n_stall, n_awgn_ok, n_awgn_err);
    check(n_clean > 0, "clean decode happened");
    check(n_corrected > 0, "correction happened");
    check(n_overflow > 0, "input overflow happened");
    check(n_awgn_ok >= 6, "most AWGN blocks at 7 dB decoded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
