// Behavioural SPI mode-0 slave used by the testbenches.
//
// On the falling edge of cs_n it loads tx_word and presents its MSB on miso;
// it samples mosi on every rising sclk edge and moves to the next miso bit on
// every falling edge. When cs_n rises it publishes the received word in
// rx_word, the number of rising edges seen in bits, and increments words.
module spi_slave_model #(
  parameter int unsigned WORD_W = 16
) (
  input  logic              sclk,
  input  logic              cs_n,
  input  logic              mosi,
  output logic              miso,
  input  logic [WORD_W-1:0] tx_word,
  output logic [WORD_W-1:0] rx_word,
  output int                bits,
  output int                words
);
  timeunit 1ns;
  timeprecision 1ps;
  logic [WORD_W-1:0] sh_tx, sh_rx;
  int                cnt;

  initial begin
    miso = 1'b0; rx_word = '0; bits = 0; words = 0; cnt = 0;
    sh_tx = '0; sh_rx = '0;
  end

  always @(negedge cs_n) begin
    sh_tx = tx_word;
    miso  = sh_tx[WORD_W-1];
    cnt   = 0;
  end

  always @(posedge sclk) if (!cs_n) begin
    sh_rx = {sh_rx[WORD_W-2:0], mosi};
    cnt++;
  end

  always @(negedge sclk) if (!cs_n) begin
    sh_tx = {sh_tx[WORD_W-2:0], 1'b0};
    miso  = sh_tx[WORD_W-1];
  end

  always @(posedge cs_n) begin
    rx_word = sh_rx;
    bits    = cnt;
    words++;
  end
endmodule
