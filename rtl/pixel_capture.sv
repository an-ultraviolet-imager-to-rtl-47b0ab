// Pixel capture and position decoder for the CCD timing generator output.
//
// The timing generator digitises every CCD pixel and drives three
// synchronisation signals with the value: frame valid (FV), line valid (LV)
// and the pixel clock. This module samples FV, LV and the pixel value on
// every rising pixel-clock edge and works out where in the image each pixel
// lies: the column counter restarts when a line begins, the row counter
// restarts when a frame begins and advances at the end of every line. That
// decoding is what the imager's electronics is described as doing; the way it
// is done here (two counters) is the simplest one and this design's own.
//
// Interface
//   sync_i        FV, LV (both active high) and pixel value, pixel-clock domain
//   pix_o         valid pixel with column x, row y, start-of-frame (sof) and
//                 start-of-line (sol) flags
//   line_done_o   one-cycle pulse after LV falls, line_len_o = pixels counted
//   frame_done_o  one-cycle pulse after FV falls, with the line count and a
//                 size_ok flag: H_PIXELS pixels in each of V_LINES lines
//
// Timing: sync_i is registered once, so a pixel present at the pins on
// edge n appears on pix_o after edge n+1 (two-cycle latency). The
// end-of-line and end-of-frame reports come one cycle after the pixel clock
// edge that sees LV or FV low, i.e. two cycles after the falling edge at the
// pins. One pixel per clock is accepted at any rate, with no back-pressure.
//
// Own choices: LV outside FV is ignored; pixels past H_PIXELS in a line and
// lines past V_LINES in a frame are counted but not emitted and mark the
// frame as not matching the format; counters saturate instead of wrapping.
module pixel_capture
  import luci_pkg::*;
#(
  parameter int unsigned H_PIXELS = SENSOR_H,
  parameter int unsigned V_LINES  = SENSOR_V
) (
  input  logic          pixclk,
  input  logic          rst_n,
  input  sensor_sync_t  sync_i,
  output pixel_t        pix_o,
  output logic          line_done_o,
  output logic [X_W:0]  line_len_o,
  output frame_status_t frame_done_o
);

  localparam logic [X_W:0] X_MAX = '1;
  localparam logic [Y_W:0] Y_MAX = '1;
  localparam logic [X_W:0] H_LEN = (X_W+1)'(H_PIXELS);
  localparam logic [Y_W:0] V_LEN = (Y_W+1)'(V_LINES);

  // Input register and the previous sample of the gated sync signals.
  sensor_sync_t s_q;
  logic         fv_d, lv_d;

  // Position counters, error flag and start-of-frame pending flag.
  logic [X_W:0] xcnt;
  logic [Y_W:0] ycnt;
  logic         bad;
  logic         sof_pend;

  // Decoded events on the registered sample.
  logic fv_now, lv_now;
  logic fv_rise, fv_fall, lv_fall;
  logic [X_W:0] x_base;
  logic [Y_W:0] y_base;
  logic         bad_base;
  logic         emit;
  logic [Y_W:0] y_after_line;
  logic         bad_after_line;

  always_comb begin
    fv_now  = s_q.fv;
    lv_now  = s_q.lv & s_q.fv;
    fv_rise = fv_now & ~fv_d;
    fv_fall = ~fv_now & fv_d;
    lv_fall = ~lv_now & lv_d;

    // A new frame restarts both counters in the same cycle.
    x_base   = fv_rise ? '0 : xcnt;
    y_base   = fv_rise ? '0 : ycnt;
    bad_base = fv_rise ? 1'b0 : bad;

    emit = lv_now && (x_base < H_LEN) && (y_base < V_LEN);

    // State after a line that ends in this cycle.
    y_after_line   = (ycnt == Y_MAX) ? ycnt : ycnt + 1'b1;
    bad_after_line = bad | (xcnt != H_LEN);
  end

  always_ff @(posedge pixclk or negedge rst_n) begin
    if (!rst_n) begin
      s_q          <= '0;
      fv_d         <= 1'b0;
      lv_d         <= 1'b0;
      xcnt         <= '0;
      ycnt         <= '0;
      bad          <= 1'b0;
      sof_pend     <= 1'b0;
      pix_o        <= '0;
      line_done_o  <= 1'b0;
      line_len_o   <= '0;
      frame_done_o <= '0;
    end else begin
      s_q  <= sync_i;
      fv_d <= fv_now;
      lv_d <= lv_now;

      // Pixel output.
      pix_o.valid <= emit;
      pix_o.sof   <= emit && (fv_rise || sof_pend);
      pix_o.sol   <= emit && (x_base == '0);
      pix_o.x     <= x_base[X_W-1:0];
      pix_o.y     <= y_base[Y_W-1:0];
      pix_o.data  <= s_q.data;

      if (fv_rise)   sof_pend <= 1'b1;
      if (emit)      sof_pend <= 1'b0;

      // Counters.
      line_done_o       <= 1'b0;
      frame_done_o.done <= 1'b0;
      if (lv_now) begin
        xcnt <= (x_base == X_MAX) ? x_base : x_base + 1'b1;
        ycnt <= y_base;
        bad  <= bad_base;
      end else if (lv_fall) begin
        line_done_o <= 1'b1;
        line_len_o  <= xcnt;
        xcnt        <= '0;
        ycnt        <= y_after_line;
        bad         <= bad_after_line;
      end else if (fv_rise) begin
        xcnt <= '0;
        ycnt <= '0;
        bad  <= 1'b0;
      end

      // End of frame; a line ending in the same cycle is included.
      if (fv_fall) begin
        frame_done_o.done    <= 1'b1;
        frame_done_o.lines   <= lv_fall ? y_after_line : ycnt;
        frame_done_o.size_ok <= !(lv_fall ? bad_after_line : bad)
                                && ((lv_fall ? y_after_line : ycnt) == V_LEN);
        sof_pend             <= 1'b0;
      end
    end
  end

  // The decoded column must always lie inside the format.
  assert property (@(posedge pixclk) disable iff (!rst_n)
                   pix_o.valid |-> ({1'b0, pix_o.x} < H_LEN) && ({1'b0, pix_o.y} < V_LEN))
    else $error("pixel_capture: position outside the format");

endmodule
