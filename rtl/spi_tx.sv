// spi_tx: SPI master that sends decoded blocks.
//
// Takes one FRAME_W-bit word with a valid/ready handshake and shifts it out
// most significant bit first in SPI mode 0: CS_N low for the frame, MOSI
// changes while SCLK is low and is stable on each rising SCLK edge. SCLK
// runs at clk/(2*DIV). ready is high while no frame is being sent. The
// paper shows an SPI port at the decoded output but gives no protocol; the
// master role, mode and clock divider are this design's choice.
module spi_tx #(
  parameter int unsigned FRAME_W = 144,
  parameter int unsigned DIV     = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               valid,
  input  logic [FRAME_W-1:0] data,
  output logic               ready,
  output logic               sclk,
  output logic               cs_n,
  output logic               mosi
);

  localparam int unsigned CW = $clog2(FRAME_W + 1);
  localparam int unsigned DW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [FRAME_W-1:0] shreg;
  logic [CW-1:0]      left;     // bits still to send
  logic [DW-1:0]      div_cnt;
  logic               tick;

  assign tick  = (div_cnt == DW'(DIV - 1));
  assign ready = cs_n;
  assign mosi  = shreg[FRAME_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg   <= '0;
      left    <= '0;
      div_cnt <= '0;
      sclk    <= 1'b0;
      cs_n    <= 1'b1;
    end else if (cs_n) begin
      div_cnt <= '0;
      sclk    <= 1'b0;
      if (valid) begin
        shreg <= data;
        left  <= CW'(FRAME_W);
        cs_n  <= 1'b0;
      end
    end else begin
      div_cnt <= tick ? '0 : div_cnt + 1'b1;
      if (tick) begin
        if (!sclk) begin
          sclk <= 1'b1;                          // receiver samples MOSI
        end else begin
          sclk  <= 1'b0;                         // shift on the falling edge
          shreg <= {shreg[FRAME_W-2:0], 1'b0};
          left  <= left - 1'b1;
          if (left == CW'(1)) cs_n <= 1'b1;
        end
      end
    end
  end

endmodule
