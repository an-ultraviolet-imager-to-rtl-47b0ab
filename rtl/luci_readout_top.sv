// Detector interface of the UV imager's FPGA board.
//
// The UV CCD is read by a commercial timing generator that clocks the CCD,
// digitises each pixel and drives frame valid, line valid and a pixel clock
// towards the FPGA; the FPGA programs the timing generator's registers over
// SPI when the instrument is switched on. This top joins the two FPGA-side
// pieces of that arrangement:
//   * spi_master     system-clock domain; its command port is where the
//                    on-board processor issues register words
//   * pixel_capture  pixel-clock domain; samples the timing generator's
//                    outputs and emits each pixel with its column and row
// The captured pixel stream and the end-of-line/end-of-frame reports leave
// as ports, where the image processing and compression chain would attach.
// The processor, the timing generator and the CCD are outside this RTL.
//
// Interface: clk/rst_n and the cfg_* handshake in the system domain; the
// spi_* pins to the timing generator; pixclk and sync_i from the timing
// generator; pix_o, line_done_o, line_len_o and frame_o in the pixel-clock
// domain. rst_n is asynchronous; it is released into the pixel-clock domain
// through a two-stage synchroniser (own choice). The two domains exchange no
// signals inside this module, so no data synchroniser is needed.
//
// Timing: as in the two blocks; pixels appear on pix_o two pixel clocks
// after they are at sync_i, one per clock, with no back-pressure.
module luci_readout_top
  import luci_pkg::*;
#(
  parameter int unsigned H_PIXELS    = SENSOR_H,
  parameter int unsigned V_LINES     = SENSOR_V,
  parameter int unsigned SPI_WORD_W  = 16,
  parameter int unsigned SPI_CLK_DIV = 4
) (
  // System domain
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_valid,
  output logic                  cfg_ready,
  input  logic [SPI_WORD_W-1:0] cfg_data,
  output logic                  cfg_rsp_valid,
  output logic [SPI_WORD_W-1:0] cfg_rsp_data,
  // SPI to the timing generator
  output logic                  spi_sclk,
  output logic                  spi_cs_n,
  output logic                  spi_mosi,
  input  logic                  spi_miso,
  // Image sync drivers from the timing generator
  input  logic                  pixclk,
  input  sensor_sync_t          sync_i,
  // Captured pixels, pixel-clock domain
  output pixel_t                pix_o,
  output logic                  line_done_o,
  output logic [X_W:0]          line_len_o,
  output frame_status_t         frame_o
);

  logic pix_rst_n;

  spi_master #(
    .WORD_W  (SPI_WORD_W),
    .CLK_DIV (SPI_CLK_DIV)
  ) u_spi (
    .clk       (clk),
    .rst_n     (rst_n),
    .cmd_valid (cfg_valid),
    .cmd_ready (cfg_ready),
    .cmd_data  (cfg_data),
    .rsp_valid (cfg_rsp_valid),
    .rsp_data  (cfg_rsp_data),
    .spi_sclk  (spi_sclk),
    .spi_cs_n  (spi_cs_n),
    .spi_mosi  (spi_mosi),
    .spi_miso  (spi_miso)
  );

  reset_sync u_pix_rst (
    .clk     (pixclk),
    .rst_n_i (rst_n),
    .rst_n_o (pix_rst_n)
  );

  pixel_capture #(
    .H_PIXELS (H_PIXELS),
    .V_LINES  (V_LINES)
  ) u_capture (
    .pixclk       (pixclk),
    .rst_n        (pix_rst_n),
    .sync_i       (sync_i),
    .pix_o        (pix_o),
    .line_done_o  (line_done_o),
    .line_len_o   (line_len_o),
    .frame_done_o (frame_o)
  );

endmodule
