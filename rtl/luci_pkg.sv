// Shared constants and types of the UV imager detector interface.
//
// The sensor format (1360 columns by 1024 rows) is the one of the UV CCD
// camera the imager uses. The pixel value width is not fixed by the sensor
// documentation used here; 12 bits is this design's choice and can be
// changed in one place. Position fields are sized for the full format so
// that reduced formats used in simulation share the same types.
package luci_pkg;

  // Sensor format: 1360 (H) x 1024 (V) pixels.
  localparam int unsigned SENSOR_H = 1360;
  localparam int unsigned SENSOR_V = 1024;

  // Width of a digitised pixel value (own choice).
  localparam int unsigned PIX_W = 12;

  // Column and row field widths, large enough for the full format.
  localparam int unsigned X_W = $clog2(SENSOR_H);   // 11
  localparam int unsigned Y_W = $clog2(SENSOR_V);   // 10

  // Synchronisation and data lines driven by the timing generator, sampled
  // on the pixel clock.
  typedef struct packed {
    logic             fv;     // frame valid
    logic             lv;     // line valid
    logic [PIX_W-1:0] data;   // ADC output
  } sensor_sync_t;

  // One captured pixel with its decoded position.
  typedef struct packed {
    logic             valid;
    logic             sof;    // first pixel of a frame
    logic             sol;    // first pixel of a line
    logic [X_W-1:0]   x;      // column, 0 = first pixel of the line
    logic [Y_W-1:0]   y;      // row, 0 = first line of the frame
    logic [PIX_W-1:0] data;
  } pixel_t;

  // End-of-frame report.
  typedef struct packed {
    logic           done;     // one-cycle pulse
    logic           size_ok;  // every line had H pixels and there were V lines
    logic [Y_W:0]   lines;    // lines seen in the frame
  } frame_status_t;

endpackage
