// tb_workload_ebn0: the evaluated operating points, at reduced block counts.
//
// Two receivers with every parameter at its default, one set to 12 and one
// to 8 padding bits through the pad_len input, each fed random padded and encrypted
// blocks through a BPSK/AWGN channel (Eb/N0 per payload bit) at 5.5, 7 and
// 9 dB. For every point it counts blocks with hard-decision errors (what a
// receiver without correction would lose), blocks decoded wrongly or not
// at all, and the mean number of cycles from fetch to output. It checks
// that decoding loses fewer blocks than the hard decisions would wherever
// the latter lose at least three, that a block whose hard decisions are
// error-free always comes out in 13 cycles, and prints the mean latency in
// ns at 100 MHz next to the uncorrected case (130 ns).
module tb_workload_ebn0;
  import aes_grand_pkg::*;
  import aes_ref_pkg::*;
  import rx_channel_pkg::*;

  localparam int NBLK = 25;
  localparam int OUT_W = 144;
  localparam real SNRS [3] = '{5.5, 7.0, 9.0};

  logic clk = 0, rst_n = 0, key_load = 0;
  block_t key;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- two receivers
  logic [1:0] sclk_i = 0, cs_n_i = '1, mosi_i = 0;
  logic [1:0] sclk_o, cs_n_o, mosi_o, ovf;

  aes_grand_rx rx12 (
    .clk, .rst_n, .key_load, .key, .pad_value(12'h800), .pad_len(4'd12),
    .spi_in_sclk(sclk_i[0]), .spi_in_cs_n(cs_n_i[0]), .spi_in_mosi(mosi_i[0]),
    .spi_out_sclk(sclk_o[0]), .spi_out_cs_n(cs_n_o[0]), .spi_out_mosi(mosi_o[0]), .rx_overflow(ovf[0]));

  aes_grand_rx rx8 (
    .clk, .rst_n, .key_load, .key, .pad_value(12'h080), .pad_len(4'd8),
    .spi_in_sclk(sclk_i[1]), .spi_in_cs_n(cs_n_i[1]), .spi_in_mosi(mosi_i[1]),
    .spi_out_sclk(sclk_o[1]), .spi_out_cs_n(cs_n_o[1]), .spi_out_mosi(mosi_o[1]), .rx_overflow(ovf[1]));

  // ---------------- output SPI slave models
  logic [OUT_W-1:0] rxf0 [$], rxf1 [$];
  logic [OUT_W-1:0] sh0, sh1;
  int nb0 = 0, nb1 = 0;
  always @(posedge sclk_o[0]) if (!cs_n_o[0]) begin sh0 = {sh0[OUT_W-2:0], mosi_o[0]}; nb0++; end
  always @(posedge cs_n_o[0]) begin if (nb0 == OUT_W) rxf0.push_back(sh0); nb0 = 0; end
  always @(posedge sclk_o[1]) if (!cs_n_o[1]) begin sh1 = {sh1[OUT_W-2:0], mosi_o[1]}; nb1++; end
  always @(posedge cs_n_o[1]) begin if (nb1 == OUT_W) rxf1.push_back(sh1); nb1 = 0; end

  // ---------------- fetch-to-output latency of each block
  int unsigned pop0, pop1;
  int unsigned lat0 [$], lat1 [$];
  always @(posedge clk) if (rst_n) begin
    if (rx12.u_ctrl.out_push) lat0.push_back(cycle - pop0);
    if (rx12.u_ctrl.in_pop) pop0 = cycle;
    if (rx8.u_ctrl.out_push) lat1.push_back(cycle - pop1);
    if (rx8.u_ctrl.in_pop) pop1 = cycle;
  end

  task automatic send_frame(input int ch, input logic [FRAME_W-1:0] f);
    cs_n_i[ch] = 0;
    repeat (2) @(negedge clk);
    for (int i = FRAME_W - 1; i >= 0; i--) begin
      mosi_i[ch] = f[i];
      repeat (2) @(negedge clk); sclk_i[ch] = 1;
      repeat (2) @(negedge clk); sclk_i[ch] = 0;
    end
    repeat (2) @(negedge clk);
    cs_n_i[ch] = 1;
    repeat (4) @(negedge clk);
  endtask

  task automatic run_point(input int ch, input real snr);
    tx_block_t b;
    tx_block_t sent [$];
    logic [15:0] st;
    logic [127:0] pt;
    int hard_err = 0, dec_err = 0, t0, pad;
    real lat_sum = 0.0;
    pad = (ch == 0) ? 12 : 8;
    if (ch == 0) begin rxf0.delete(); lat0.delete(); end
    else         begin rxf1.delete(); lat1.delete(); end
    for (int n = 0; n < NBLK; n++) begin
      b = make_block(key, pad, (ch == 0) ? 16'h800 : 16'h80, CH_AWGN, 0, snr);
      sent.push_back(b);
      send_frame(ch, frame_of(b));
    end
    t0 = cycle;
    while (((ch == 0) ? rxf0.size() : rxf1.size()) < NBLK && cycle - t0 < 2000000) @(negedge clk);
    check(((ch == 0) ? rxf0.size() : rxf1.size()) == NBLK, "all blocks came out");
    for (int n = 0; n < NBLK && n < ((ch == 0) ? rxf0.size() : rxf1.size()); n++) begin
      b = sent[n];
      {st, pt} = (ch == 0) ? rxf0[n] : rxf1[n];
      if (b.nerr > 0) hard_err++;
      if (st[15] || pt != b.payload_block) dec_err++;
      if (b.nerr == 0) check(st == 16'd1 && ((ch == 0) ? lat0[n] : lat1[n]) == 13, "error-free block in 13 cycles");
      lat_sum += real'((ch == 0) ? lat0[n] : lat1[n]);
    end
    $display("padding %0d bits, Eb/N0 %.1f dB: blocks %0d, hard-decision block errors %0d, after decoding %0d, mean latency %.0f ns",
             pad, snr, NBLK, hard_err, dec_err, lat_sum * 10.0 / NBLK);
    if (hard_err >= 3) check(dec_err < hard_err, "decoding loses fewer blocks than hard decisions");
  endtask

  initial begin
    key = {$urandom, $urandom, $urandom, $urandom};
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk); key_load = 1; @(negedge clk); key_load = 0;
    repeat (12) @(negedge clk);
    for (int s = 0; s < 3; s++)
      fork
        run_point(0, SNRS[s]);
        run_point(1, SNRS[s]);
      join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
