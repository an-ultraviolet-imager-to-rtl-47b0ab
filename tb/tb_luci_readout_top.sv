// End-to-end testbench of the detector interface at full size.
//
// The top is instantiated with its default parameters (1360 x 1024 format,
// 16-bit SPI words) and connected to a behavioural timing generator. The
// bench acts as the on-board processor: it programs the frame geometry over
// SPI, reads every word back through the SPI echo, starts the readout and
// checks every pixel, line report and frame report that comes out:
//   1. a 4-line frame          -> frame reported as not matching the format
//   2. a full 1360 x 1024 frame -> every pixel position and value checked,
//                                 frame matches; the readout takes exactly
//                                 1024*(1360+blank) pixel clocks, which at the
//                                 model's 25 MHz pixel clock is over 12 fps
//   3. a 3-line frame of 1362-pixel lines -> extra pixels dropped, mismatch
// Each mechanism (SPI write, read back, matching frame, short frame, clipped
// line) is counted, and one that never happens counts as a failure.
module tb_luci_readout_top;
  timeunit 1ns;
  timeprecision 1ps;
  import luci_pkg::*;

  localparam int H = SENSOR_H;
  localparam int V = SENSOR_V;
  localparam int HB = 4;      // line blanking programmed into the model

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;       // 100 MHz system clock

  logic          cfg_valid = 1'b0, cfg_ready, cfg_rsp_valid;
  logic [15:0]   cfg_data = '0, cfg_rsp_data;
  logic          spi_sclk, spi_cs_n, spi_mosi, spi_miso;
  logic          pixclk;
  sensor_sync_t  sync_i;
  pixel_t        pix_o;
  logic          line_done_o;
  logic [X_W:0]  line_len_o;
  frame_status_t frame_o;
  int            frames_sent;

  luci_readout_top dut (
    .clk, .rst_n, .cfg_valid, .cfg_ready, .cfg_data, .cfg_rsp_valid,
    .cfg_rsp_data, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso, .pixclk,
    .sync_i, .pix_o, .line_done_o, .line_len_o, .frame_o
  );

  vsp01m01_model tg (
    .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .pixclk, .sync_o(sync_i), .frames_sent
  );

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $realtime, what);
    end
  endtask

  function automatic int pix_value(int x, int y, int f);
    return (x * 3 + y * 29 + f * 1031) & ((1 << PIX_W) - 1);
  endfunction

  // Mechanism counters.
  int n_spi_writes = 0, n_readbacks = 0, n_frames_ok = 0, n_frames_short = 0;
  int n_lines_clipped = 0, n_pixels = 0, n_lines = 0;

  // ---------------- processor side: SPI words ----------------
  logic [15:0] last_sent = '0;
  bit          have_last = 0;

  task automatic spi_write(input logic [7:0] addr, input logic [7:0] data);
    @(negedge clk);
    cfg_data  = {addr, data};
    cfg_valid = 1'b1;
    while (!cfg_ready) @(negedge clk);
    @(negedge clk);
    cfg_valid = 1'b0;
    while (!cfg_rsp_valid) @(negedge clk);
    n_spi_writes++;
    // The model echoes the previous word.
    if (have_last) begin
      check(cfg_rsp_data == last_sent,
            $sformatf("read back %h expected %h", cfg_rsp_data, last_sent));
      n_readbacks++;
    end
    last_sent = {addr, data};
    have_last = 1;
  endtask

  // Geometry of the frame currently being read out, set before running.
  int cur_h = 0, cur_v = 0;

  task automatic set_geometry(input int h, input int v);
    spi_write(8'h01, h[7:0]);
    spi_write(8'h02, h[15:8]);
    spi_write(8'h03, v[7:0]);
    spi_write(8'h04, v[15:8]);
    spi_write(8'h05, 8'(HB));
    spi_write(8'h06, 8'd16);
    cur_h = h;
    cur_v = v;
  endtask

  // Run exactly one frame: set run, wait for the frame to start, clear run,
  // wait for the frame report.
  int frames_seen = 0;
  task automatic one_frame();
    int n0;
    n0 = frames_seen;
    spi_write(8'h00, 8'h01);
    @(posedge sync_i.fv);
    spi_write(8'h00, 8'h00);
    wait (frames_seen == n0 + 1);
  endtask

  // ---------------- pixel side: monitor ----------------
  int ex = 0, ey = 0, fidx = 0;
  longint sof_cycle = 0, pcyc = 0;
  always @(posedge pixclk) pcyc <= pcyc + 1;

  always @(negedge pixclk) if (rst_n) begin
    int hh, vv;
    hh = (cur_h < H) ? cur_h : H;
    vv = (cur_v < V) ? cur_v : V;
    if (pix_o.valid) begin
      n_pixels++;
      check(int'(pix_o.x) == ex && int'(pix_o.y) == ey
            && int'(pix_o.data) == pix_value(ex, ey, fidx)
            && pix_o.sof == (ex == 0 && ey == 0) && pix_o.sol == (ex == 0),
            $sformatf("pixel (%0d,%0d) value %0d sof %0b sol %0b, expected (%0d,%0d) value %0d",
                      pix_o.x, pix_o.y, pix_o.data, pix_o.sof, pix_o.sol, ex, ey,
                      pix_value(ex, ey, fidx)));
      if (pix_o.sof) sof_cycle = pcyc;
      ex++;
      if (ex == hh) begin
        ex = 0;
        ey++;
      end
    end
    if (line_done_o) begin
      n_lines++;
      check(int'(line_len_o) == cur_h, $sformatf("line length %0d", line_len_o));
      if (cur_h > H) n_lines_clipped++;
    end
    if (frame_o.done) begin
      check(int'(frame_o.lines) == cur_v,
            $sformatf("frame lines %0d expected %0d", frame_o.lines, cur_v));
      check(frame_o.size_ok == (cur_h == H && cur_v == V), "frame size flag");
      check(ey == vv && ex == 0, $sformatf("frame ended after %0d lines of pixels", ey));
      // One pixel per clock: the readout takes v*(h+blank) pixel clocks.
      check(pcyc - sof_cycle == longint'(cur_v) * (longint'(cur_h) + longint'(HB)),
            $sformatf("frame took %0d pixel clocks, expected %0d", pcyc - sof_cycle,
                      cur_v * (cur_h + HB)));
      if (frame_o.size_ok) n_frames_ok++;
      else if (cur_v < V && cur_h == H) n_frames_short++;
      ex = 0;
      ey = 0;
      fidx++;
      frames_seen++;
    end
  end

  // Watchdog: a full frame is about 1.4 million pixel clocks (56 ms).
  initial begin
    #200ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real fps;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);

    set_geometry(H, 4);
    one_frame();

    set_geometry(H, V);
    one_frame();
    fps = 1.0s / (real'(V) * (H + HB) * 40ns);
    $display("full frame: %0d pixels, %0d lines; %.1f frames/s at a 25 MHz pixel clock",
             n_pixels, n_lines, fps);
    check(fps >= 12.0, "full frame rate below 12 fps");

    set_geometry(H + 2, 3);
    one_frame();

    check(n_pixels == H * 4 + H * V + H * 3, $sformatf("%0d pixels captured", n_pixels));
    check(n_lines == 4 + V + 3, "lines reported");
    check(frames_sent == 3, $sformatf("model sent %0d frames", frames_sent));
    check(n_spi_writes > 0, "no SPI write happened");
    check(n_readbacks > 0, "no SPI read back happened");
    check(n_frames_ok == 1, "matching frame count");
    check(n_frames_short == 1, "short frame count");
    check(n_lines_clipped == 3, "clipped line count");
    $display("mechanisms: spi_writes=%0d readbacks=%0d frames_ok=%0d frames_short=%0d lines_clipped=%0d",
             n_spi_writes, n_readbacks, n_frames_ok, n_frames_short, n_lines_clipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
