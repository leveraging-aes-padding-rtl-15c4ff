// spi_rx: SPI slave that receives demodulated blocks.
//
// SPI mode 0 (data sampled on the rising SCLK edge), most significant bit
// first, one frame of FRAME_W bits per CS_N low period. SCLK, CS_N and MOSI
// are synchronised into the system clock with two flip-flops and the rising
// SCLK edge is detected there, so SCLK must be slower than clk/2 (at most
// clk/4 is a safe choice). When FRAME_W bits have arrived, frame_valid
// pulses for one cycle with the frame; bits beyond FRAME_W in the same
// frame are ignored, and raising CS_N early discards a partial frame. The
// paper shows an SPI port at the demodulated-signal input but gives no
// protocol; mode, bit order and frame layout are this design's choice.
module spi_rx #(
  parameter int unsigned FRAME_W = 896
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sclk,
  input  logic               cs_n,
  input  logic               mosi,
  output logic               frame_valid,
  output logic [FRAME_W-1:0] frame
);

  localparam int unsigned CW = $clog2(FRAME_W + 1);

  logic [2:0]   sclk_s;
  logic [1:0]   cs_s, mosi_s;
  logic [CW-1:0] cnt;
  logic [FRAME_W-2:0] shreg;   // the bits before the last one
  logic         rise;

  assign rise = sclk_s[1] && !sclk_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s      <= '0;
      cs_s        <= '1;
      mosi_s      <= '0;
      cnt         <= '0;
      shreg       <= '0;
      frame_valid <= 1'b0;
      frame       <= '0;
    end else begin
      sclk_s      <= {sclk_s[1:0], sclk};
      cs_s        <= {cs_s[0], cs_n};
      mosi_s      <= {mosi_s[0], mosi};
      frame_valid <= 1'b0;
      if (cs_s[1]) begin
        cnt <= '0;
      end else if (rise && cnt < CW'(FRAME_W)) begin
        shreg <= {shreg[FRAME_W-3:0], mosi_s[1]};
        cnt   <= cnt + 1'b1;
        if (cnt == CW'(FRAME_W - 1)) begin
          frame_valid <= 1'b1;
          frame       <= {shreg, mosi_s[1]};
        end
      end
    end
  end

endmodule
