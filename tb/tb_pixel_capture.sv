// Self-checking testbench for pixel_capture.
//
// Drives frame valid, line valid and pixel values as the timing generator
// would, at a reduced format (16 x 6) to keep the run short, and checks every
// emitted pixel (value, column, row, start-of-frame/line flags and its
// two-cycle latency), every end-of-line report and every end-of-frame report
// against expectations built from the loops that generate the stimulus.
// Covered: well-formed frames with varying blanking, a short line, a long
// line, an extra line, line valid outside frame valid, and line and frame
// valid changing in the same cycle.
module tb_pixel_capture;
  timeunit 1ns;
  timeprecision 1ps;
  import luci_pkg::*;

  localparam int unsigned H = 16;
  localparam int unsigned V = 6;

  logic          pixclk = 1'b0;
  logic          rst_n  = 1'b0;
  sensor_sync_t  sync_i;
  pixel_t        pix_o;
  logic          line_done_o;
  logic [X_W:0]  line_len_o;
  frame_status_t frame_o;

  int checks = 0, failures = 0;
  int cyc = 0;

  pixel_capture #(.H_PIXELS(H), .V_LINES(V)) dut (
    .pixclk, .rst_n, .sync_i, .pix_o, .line_done_o, .line_len_o,
    .frame_done_o(frame_o)
  );

  always #5 pixclk = ~pixclk;
  always @(posedge pixclk) cyc <= cyc + 1;

  // Expected outputs, each tagged with the cycle at which it must appear.
  typedef struct {
    int x, y, data; bit sof, sol; int at;
  } exp_pix_t;
  typedef struct { int len; int at; } exp_line_t;
  typedef struct { int lines; bit ok; int at; } exp_frame_t;

  exp_pix_t   qp[$];
  exp_line_t  ql[$];
  exp_frame_t qf[$];

  // Bookkeeping of what has been driven.
  bit prev_fv = 0, prev_lv_eff = 0;
  int cur_len = 0, cur_lines = 0;
  bit cur_bad = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL at cycle %0d: %s", cyc, what);
    end
  endtask

  function automatic int pix_value(int x, int y, int f);
    return (x * 7 + y * 131 + f * 977) & ((1 << PIX_W) - 1);
  endfunction

  // Drive one pixel-clock sample. x, y describe the position the stimulus
  // means (ignored when not a pixel); emitted pixels are queued.
  task automatic drive(input bit fv, input bit lv, input int data,
                       input int x, input int y, input bit sof);
    bit lv_eff;
    exp_pix_t ep;
    exp_line_t el;
    exp_frame_t ef;
    @(negedge pixclk);
    sync_i.fv   = fv;
    sync_i.lv   = lv;
    sync_i.data = PIX_W'(data);
    lv_eff = fv & lv;
    // Edge cyc+1 samples these; the result is registered at edge cyc+2.
    if (fv && !prev_fv) begin
      cur_len = 0; cur_lines = 0; cur_bad = 0;
    end
    if (lv_eff) begin
      if (x < H && y < V) begin
        ep.x = x; ep.y = y; ep.data = data; ep.sof = sof; ep.sol = (x == 0);
        ep.at = cyc + 2;
        qp.push_back(ep);
      end
      cur_len++;
    end
    if (!lv_eff && prev_lv_eff) begin
      el.len = cur_len; el.at = cyc + 2;
      ql.push_back(el);
      if (cur_len != H) cur_bad = 1;
      cur_lines++;
      cur_len = 0;
    end
    if (!fv && prev_fv) begin
      ef.lines = cur_lines; ef.ok = !cur_bad && cur_lines == V; ef.at = cyc + 2;
      qf.push_back(ef);
    end
    prev_fv = fv;
    prev_lv_eff = lv_eff;
  endtask

  task automatic idle(input int n);
    repeat (n) drive(0, 0, 0, 0, 0, 0);
  endtask

  // One frame: lens[i] pixels in line i, hb blank cycles between lines.
  // same_edge: line and frame valid rise and fall together.
  task automatic frame(input int lens[], input int hb, input int fidx,
                       input bit same_edge);
    bit first = 1;
    if (!same_edge) repeat (3) drive(1, 0, 0, 0, 0, 0);
    for (int y = 0; y < lens.size(); y++) begin
      for (int x = 0; x < lens[y]; x++) begin
        drive(1, 1, pix_value(x, y, fidx), x, y, first && x < H && y < V);
        if (x < H && y < V) first = 0;
      end
      if (!(same_edge && y == lens.size() - 1))
        repeat (hb + (y % 3)) drive(1, 0, 0, 0, 0, 0);
    end
    idle(4);
  endtask

  // Monitor: compare every output against the expectation queues.
  always @(negedge pixclk) if (rst_n) begin
    if (pix_o.valid) begin
      if (qp.size() == 0) check(0, "unexpected pixel");
      else begin
        exp_pix_t e;
        e = qp.pop_front();
        check(int'(pix_o.x) == e.x && int'(pix_o.y) == e.y,
              $sformatf("position (%0d,%0d) expected (%0d,%0d)", pix_o.x, pix_o.y, e.x, e.y));
        check(int'(pix_o.data) == e.data, $sformatf("value %0d expected %0d", pix_o.data, e.data));
        check(pix_o.sof == e.sof && pix_o.sol == e.sol, "sof/sol flags");
        check(cyc == e.at, $sformatf("pixel latency: at %0d expected %0d", cyc, e.at));
      end
    end
    if (line_done_o) begin
      if (ql.size() == 0) check(0, "unexpected line end");
      else begin
        exp_line_t e;
        e = ql.pop_front();
        check(int'(line_len_o) == e.len, $sformatf("line length %0d expected %0d", line_len_o, e.len));
        check(cyc == e.at, "line end timing");
      end
    end
    if (frame_o.done) begin
      if (qf.size() == 0) check(0, "unexpected frame end");
      else begin
        exp_frame_t e;
        e = qf.pop_front();
        check(int'(frame_o.lines) == e.lines, $sformatf("frame lines %0d expected %0d", frame_o.lines, e.lines));
        check(frame_o.size_ok == e.ok, $sformatf("size_ok %0b expected %0b", frame_o.size_ok, e.ok));
        check(cyc == e.at, "frame end timing");
      end
    end
  end

  // Watchdog.
  initial begin
    repeat (20000) @(posedge pixclk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int good[], shortl[], longl[], extra[];
    sync_i = '0;
    repeat (3) @(posedge pixclk);
    rst_n = 1'b1;
    idle(3);

    good = new[V];
    foreach (good[i]) good[i] = H;
    shortl = new[V];
    foreach (shortl[i]) shortl[i] = (i == 2) ? H - 3 : H;
    longl = new[V];
    foreach (longl[i]) longl[i] = (i == 4) ? H + 2 : H;
    extra = new[V + 1];
    foreach (extra[i]) extra[i] = H;

    frame(good, 2, 0, 0);
    frame(good, 5, 1, 0);
    frame(shortl, 3, 2, 0);
    frame(longl, 3, 3, 0);
    frame(extra, 2, 4, 0);
    // Line valid without frame valid is not image data.
    repeat (6) drive(0, 1, 123, 0, 0, 0);
    idle(3);
    frame(good, 1, 5, 1);     // line and frame valid edges coincide
    frame(good, 2, 6, 0);
    idle(6);

    check(qp.size() == 0, $sformatf("%0d expected pixels never appeared", qp.size()));
    check(ql.size() == 0, "expected line ends missing");
    check(qf.size() == 0, "expected frame ends missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
