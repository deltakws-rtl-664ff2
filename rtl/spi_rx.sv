// spi_rx: serial host interface of the chip.
//
// The host (an FPGA in the measurement setup) shifts data in MSB first, one bit per rising edge
// of the fast interface clock, while cs_n is low. When cs_n returns high the received bits are
// presented on rx_word (right-aligned) together with how many bits were sent, and rx_valid pulses
// for one clock. The receiver of the word decides from rx_bits what kind of frame it was (the
// feature extractor, for example, treats a 12-bit frame as an audio sample). At the falling edge
// of cs_n the word on tx_word is loaded and shifted out on miso, MSB first, one bit per clock.
// rx_word holds its value until the next frame ends, so a slower clock domain may sample it after
// a synchronised rx_valid.
// The paper states that the input is streamed over SPI and that SPI moves one bit per clock of the
// fast clock; the frame format and the chip-select framing are this design's choice.
module spi_rx #(
  parameter int MAXB = 40,   // longest frame in bits
  parameter int TXB  = 16    // width of the status word shifted out
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cs_n,
  input  logic                     mosi,
  output logic                     miso,
  input  logic [TXB-1:0]           tx_word,
  output logic [MAXB-1:0]          rx_word,
  output logic [$clog2(MAXB+1)-1:0] rx_bits,
  output logic                     rx_valid
);
  logic [MAXB-1:0]            sh;
  logic [$clog2(MAXB+1)-1:0]  cnt;
  logic [TXB-1:0]             tx_sh;
  logic                       cs_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '0; cnt <= '0; tx_sh <= '0; cs_q <= 1'b1;
      rx_word <= '0; rx_bits <= '0; rx_valid <= 1'b0;
    end else begin
      cs_q     <= cs_n;
      rx_valid <= 1'b0;
      if (!cs_n) begin
        sh <= {sh[MAXB-2:0], mosi};
        if (cnt != MAXB[$bits(cnt)-1:0]) cnt <= cnt + 1'b1;
        if (cs_q) tx_sh <= {tx_word[TXB-2:0], 1'b0};  // first bit: load status, MSB already out
        else      tx_sh <= {tx_sh[TXB-2:0], 1'b0};
      end else if (!cs_q) begin                // cs_n rose: frame complete
        rx_word  <= sh;
        rx_bits  <= cnt;
        rx_valid <= (cnt != '0);
        cnt      <= '0;
        sh       <= '0;
      end
    end
  end

  // the first bit is driven directly from tx_word so it is valid during the first clock
  assign miso = (!cs_n && cs_q) ? tx_word[TXB-1] : tx_sh[TXB-1];
endmodule
