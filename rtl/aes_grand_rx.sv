// aes_grand_rx: receiver with joint ORBGRAND decoding and AES-128 decryption.
//
// The transmitter pads a k-bit payload with PAD_BITS = n-k known bits to the
// 128-bit AES block and encrypts it, unchanged from a plain encrypting IoT
// node. Because AES output looks random, the set of 128-bit ciphertexts whose
// decryption ends in the right padding acts like a random code with n-k
// redundancy bits. This receiver decodes that code: it decrypts the received
// hard decisions, and while the padding is wrong it flips bits following
// ORBGRAND (least reliable bits first, increasing logistic weight) and
// decrypts again, until the padding matches.
//
// Data path:  SPI in -> input FIFOs (Y, LLR magnitudes) -> noise removal
// (Y ^ error pattern) + AES-128 decryption -> padding check -> output FIFOs
// (plaintext, status) -> SPI out. The error pattern generator (reliability
// sorter, pattern generator, error generator) is fed with the LLR
// magnitudes and enabled by the controller on each failed padding check.
//
// Interfaces
//   key_load/key   AES-128 key; round keys are ready 10 cycles after key_load.
//   pad_value      the padding sequence the transmitter appends.
//   pad_len        padding length in use, up to PAD_BITS (12 or 8 in the
//                  paper); the last pad_len plaintext bits are checked.
//   SPI in         frame of 128 + 128*MAG_W bits, MSB first:
//                  {Y[127:0], mag[127], ..., mag[0]} with Y[i] the hard
//                  decision of bit i and mag[i] its LLR magnitude.
//   SPI out        frame of 144 bits, MSB first: {status[15:0], Y'[127:0]},
//                  status = {fail, number of decryptions spent}.
//   rx_overflow    sticky: a received frame was dropped, input FIFOs full.
// Timing: a block that needs no correction spends 13 cycles in decryption
// (130 ns at 100 MHz); each further guess costs another 13 cycles. Queued
// blocks follow each other without a gap, one every 13 cycles when clean.
// The structure follows the paper's receiver diagram; the interface formats,
// FIFO depths, LLR width and the pattern limits HW_MAX/LW_MAX are this
// design's choices.
module aes_grand_rx
  import aes_grand_pkg::*;
#(
  parameter int unsigned PAD_BITS  = 12,
  parameter int unsigned MAG_W     = 6,
  parameter int unsigned HW_MAX    = 8,
  parameter int unsigned LW_MAX    = 64,
  parameter int unsigned IN_DEPTH  = 4,
  parameter int unsigned OUT_DEPTH = 4,
  parameter int unsigned SPI_DIV   = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                key_load,
  input  block_t              key,
  input  logic [PAD_BITS-1:0] pad_value,
  input  logic [$clog2(PAD_BITS+1)-1:0] pad_len,
  input  logic                spi_in_sclk,
  input  logic                spi_in_cs_n,
  input  logic                spi_in_mosi,
  output logic                spi_out_sclk,
  output logic                spi_out_cs_n,
  output logic                spi_out_mosi,
  output logic                rx_overflow
);

  localparam int unsigned N        = BLOCK_W;
  localparam int unsigned MAGS_W   = N * MAG_W;
  localparam int unsigned IN_W     = N + MAGS_W;
  localparam int unsigned STATUS_W = 16;
  localparam int unsigned OUT_W    = STATUS_W + N;

  // ---------------------------------------------------------- key schedule
  round_keys_t round_keys;
  logic        key_ready;

  aes_key_expand u_keys (.clk, .rst_n, .key_load, .key, .round_keys, .key_ready);

  // ------------------------------------------------------------ SPI input
  logic            frame_valid;
  logic [IN_W-1:0] frame;

  spi_rx #(.FRAME_W(IN_W)) u_spi_rx (
    .clk, .rst_n, .sclk(spi_in_sclk), .cs_n(spi_in_cs_n), .mosi(spi_in_mosi),
    .frame_valid, .frame
  );

  // ---------------------------------------------------------- input FIFOs
  logic                    in_pop, y_full, y_empty, m_full, m_empty;
  block_t                  in_y;
  logic [N-1:0][MAG_W-1:0] in_mag;

  sync_fifo #(.WIDTH(N), .DEPTH(IN_DEPTH)) u_y_fifo (
    .clk, .rst_n, .push(frame_valid && !y_full), .wdata(frame[IN_W-1 -: N]),
    .pop(in_pop), .rdata(in_y), .full(y_full), .empty(y_empty)
  );

  sync_fifo #(.WIDTH(MAGS_W), .DEPTH(IN_DEPTH)) u_llr_fifo (
    .clk, .rst_n, .push(frame_valid && !y_full), .wdata(frame[MAGS_W-1:0]),
    .pop(in_pop), .rdata(in_mag), .full(m_full), .empty(m_empty)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    rx_overflow <= 1'b0;
    else if (frame_valid && y_full) rx_overflow <= 1'b1;
  end

  // ---------------------------------------------------- noise removal AES
  logic   aes_start, aes_busy, aes_done;
  block_t aes_y, aes_err, aes_pt;

  noise_removal_aes u_nr_aes (
    .clk, .rst_n, .round_keys, .start(aes_start), .y(aes_y), .err(aes_err),
    .busy(aes_busy), .done(aes_done), .pt(aes_pt)
  );

  // --------------------------------------------------------- padding check
  logic pad_ok;

  padding_check #(.PAD_BITS(PAD_BITS)) u_pad (.pt(aes_pt), .pad_value, .pad_len, .pad_ok);

  // ----------------------------------------------- error pattern generator
  logic        epg_load, epg_enable, epg_ready, epg_err_valid, epg_exhausted;
  block_t      epg_err;
  logic [15:0] epg_lw;

  error_pattern_generator #(.N(N), .MAG_W(MAG_W), .HW_MAX(HW_MAX), .LW_MAX(LW_MAX)) u_epg (
    .clk, .rst_n, .load(epg_load), .mag(in_mag), .enable(epg_enable),
    .ready(epg_ready), .err_valid(epg_err_valid), .err(epg_err), .err_lw(epg_lw),
    .exhausted(epg_exhausted)
  );

  // ------------------------------------------------------------ controller
  logic                out_push, pt_full, pt_empty, st_full, st_empty;
  block_t              out_pt;
  logic [STATUS_W-1:0] out_status;

  grand_ctrl u_ctrl (
    .clk, .rst_n, .key_ready,
    .in_empty(y_empty || m_empty), .in_y, .in_pop,
    .aes_start, .aes_y, .aes_err, .aes_done, .aes_pt, .pad_ok,
    .epg_load, .epg_enable, .epg_ready, .epg_err_valid, .epg_err, .epg_exhausted,
    .out_full(pt_full || st_full), .out_push, .out_pt, .out_status
  );

  // --------------------------------------------------------- output FIFOs
  block_t              q_pt;
  logic [STATUS_W-1:0] q_status;
  logic                tx_ready, tx_fire;

  sync_fifo #(.WIDTH(N), .DEPTH(OUT_DEPTH)) u_pt_fifo (
    .clk, .rst_n, .push(out_push), .wdata(out_pt), .pop(tx_fire),
    .rdata(q_pt), .full(pt_full), .empty(pt_empty)
  );

  sync_fifo #(.WIDTH(STATUS_W), .DEPTH(OUT_DEPTH)) u_status_fifo (
    .clk, .rst_n, .push(out_push), .wdata(out_status), .pop(tx_fire),
    .rdata(q_status), .full(st_full), .empty(st_empty)
  );

  // ------------------------------------------------------------ SPI output
  assign tx_fire = tx_ready && !pt_empty && !st_empty;

  spi_tx #(.FRAME_W(OUT_W), .DIV(SPI_DIV)) u_spi_tx (
    .clk, .rst_n, .valid(!pt_empty && !st_empty), .data({q_status, q_pt}),
    .ready(tx_ready), .sclk(spi_out_sclk), .cs_n(spi_out_cs_n), .mosi(spi_out_mosi)
  );

  // the decryption core is free whenever the controller starts it
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) aes_start |-> !aes_busy)
    else $error("aes_grand_rx: decryption started while busy");

  logic unused;
  assign unused = ^{epg_lw, m_full};

endmodule
