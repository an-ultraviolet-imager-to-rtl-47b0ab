// SPI master for programming the CCD timing generator.
//
// At switch-on the processor in the FPGA writes the timing generator's
// registers over a serial (SPI) link; this module is that link's master.
// Each accepted command word is sent MSB first in one chip-select period,
// and the word the slave shifts back on MISO in the same period is returned,
// so registers can be read back as well as written.
//
// The paper names the link as SPI only. The mode (mode 0: SCLK idles low,
// MOSI changes on the falling edge, both sides sample on the rising edge),
// the 16-bit word, the clock divider and the valid/ready handshake are this
// design's choices.
//
// Interface
//   cmd_valid/cmd_ready/cmd_data  word to send; accepted when both are high.
//                                 cmd_data must stay stable while valid and
//                                 not ready (checked by an assertion).
//   rsp_valid/rsp_data            one-cycle pulse with the word read on MISO
//   spi_sclk/spi_cs_n/spi_mosi/spi_miso   the serial pins
//
// Timing: SCLK has a period of 2*CLK_DIV clk cycles. CS_N falls on the clock
// edge that accepts the word (edge 0), the first SCLK rise is at edge
// CLK_DIV, and CS_N rises with the rsp_valid pulse at edge
// (2*WORD_W+1)*CLK_DIV. The next word can be accepted CLK_DIV cycles later,
// so one word takes (2*WORD_W+2)*CLK_DIV cycles: 136 at the defaults.
module spi_master #(
  parameter int unsigned WORD_W  = 16,
  parameter int unsigned CLK_DIV = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [WORD_W-1:0] cmd_data,
  output logic              rsp_valid,
  output logic [WORD_W-1:0] rsp_data,
  output logic              spi_sclk,
  output logic              spi_cs_n,
  output logic              spi_mosi,
  input  logic              spi_miso
);

  typedef enum logic [1:0] {IDLE, XFER, GAP} state_e;

  localparam int unsigned DIV_W  = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;
  localparam int unsigned EDGE_W = $clog2(2*WORD_W + 1);
  localparam logic [DIV_W-1:0]  DIV_LAST  = DIV_W'(CLK_DIV - 1);
  localparam logic [EDGE_W-1:0] EDGE_LAST = EDGE_W'(2*WORD_W);

  state_e             state;
  logic [DIV_W-1:0]   div_cnt;
  logic [EDGE_W-1:0]  edge_cnt;
  logic [WORD_W-1:0]  tx_sr, rx_sr;
  logic               tick;

  assign tick      = (div_cnt == DIV_LAST);
  // Ready when idle, and in the last cycle of the gap so that back-to-back
  // words keep a fixed period.
  assign cmd_ready = (state == IDLE) || (state == GAP && tick);
  assign spi_mosi  = tx_sr[WORD_W-1];
  assign rsp_data  = rx_sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      div_cnt   <= '0;
      edge_cnt  <= '0;
      tx_sr     <= '0;
      rx_sr     <= '0;
      spi_sclk  <= 1'b0;
      spi_cs_n  <= 1'b1;
      rsp_valid <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      div_cnt   <= (state == IDLE || tick) ? '0 : div_cnt + 1'b1;
      unique case (state)
        IDLE, GAP: begin
          if (cmd_valid && cmd_ready) begin
            state    <= XFER;
            tx_sr    <= cmd_data;
            spi_cs_n <= 1'b0;
            edge_cnt <= '0;
          end else if (state == GAP && tick) begin
            state <= IDLE;
          end
        end
        XFER: begin
          if (tick) begin
            if (edge_cnt == EDGE_LAST) begin
              // Trailing half period done: release chip select.
              spi_cs_n  <= 1'b1;
              rsp_valid <= 1'b1;
              state     <= GAP;
            end else begin
              spi_sclk <= ~spi_sclk;
              if (!spi_sclk) rx_sr <= {rx_sr[WORD_W-2:0], spi_miso};  // rising
              else           tx_sr <= {tx_sr[WORD_W-2:0], 1'b0};      // falling
              edge_cnt <= edge_cnt + 1'b1;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Requester rule: an offered word is held until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_data))
    else $error("spi_master: command changed before it was accepted");

  // Chip select is never released in the middle of a word.
  assert property (@(posedge clk) disable iff (!rst_n)
                   $rose(spi_cs_n) |-> edge_cnt == EDGE_LAST)
    else $error("spi_master: word cut short");

endmodule
