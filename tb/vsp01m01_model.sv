// Behavioural model of the CCD timing generator with its ADC, as seen from
// the FPGA: a pixel clock, frame valid, line valid and a digitised pixel
// value, plus an SPI mode-0 slave through which its registers are written.
// Not synthesizable and not the real chip: the register map below is
// invented for the testbench, since the real one is not part of this design.
//
// SPI word: {address[7:0], data[7:0]}. The word shifted back during a
// transfer is the previous word received (echo), which lets the bench check
// the read path. Registers:
//   0x00 CTRL    bit 0: run (frames repeat while set)
//   0x01/0x02    active pixels per line, low/high byte
//   0x03/0x04    lines per frame, low/high byte
//   0x05         line blanking in pixel clocks (at least 1)
//   0x06         frame blanking in pixel clocks (at least 1)
// Pixel value of column x, row y in frame f is pix_value(x, y, f).
// Outputs change on the falling edge of pixclk.
module vsp01m01_model
  import luci_pkg::*;
#(
  parameter realtime PIX_HALF = 20ns   // 25 MHz pixel clock
) (
  input  logic         sclk,
  input  logic         cs_n,
  input  logic         mosi,
  output logic         miso,
  output logic         pixclk,
  output sensor_sync_t sync_o,
  output int           frames_sent
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [15:0] rx_word, echo;
  int          bits, words;
  logic [7:0]  regs [0:7];

  spi_slave_model #(.WORD_W(16)) u_spi (
    .sclk, .cs_n, .mosi, .miso, .tx_word(echo), .rx_word, .bits, .words
  );

  function automatic int pix_value(int x, int y, int f);
    return (x * 3 + y * 29 + f * 1031) & ((1 << PIX_W) - 1);
  endfunction

  initial begin
    echo = '0;
    foreach (regs[i]) regs[i] = '0;
    regs[5] = 8'd4;
    regs[6] = 8'd8;
  end

  // Register write at the end of every complete word.
  always @(words) begin
    if (bits == 16) begin
      regs[rx_word[10:8]] = rx_word[7:0];
      echo = rx_word;
    end
  end

  initial pixclk = 1'b0;
  always #(PIX_HALF) pixclk = ~pixclk;

  initial begin
    int h, v, f;
    sync_o = '0;
    frames_sent = 0;
    f = 0;
    forever begin
      @(negedge pixclk);
      if (regs[0][0]) begin
        h = int'({regs[2], regs[1]});
        v = int'({regs[4], regs[3]});
        sync_o.fv = 1'b1;
        sync_o.lv = 1'b0;
        repeat (2) @(negedge pixclk);
        for (int y = 0; y < v; y++) begin
          for (int x = 0; x < h; x++) begin
            sync_o.lv   = 1'b1;
            sync_o.data = PIX_W'(pix_value(x, y, f));
            @(negedge pixclk);
          end
          sync_o.lv   = 1'b0;
          sync_o.data = '0;
          repeat ((regs[5] == 0) ? 1 : int'(regs[5])) @(negedge pixclk);
        end
        sync_o.fv = 1'b0;
        f++;
        frames_sent = f;
        repeat ((regs[6] == 0) ? 1 : int'(regs[6])) @(negedge pixclk);
      end
    end
  end
endmodule
