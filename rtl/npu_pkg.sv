// npu_pkg: types shared by the neuromorphic processing unit.
//
// A DVS event is e = (t, x, y, p): a microsecond timestamp, pixel coordinates
// and the polarity (1 = brightness went up, "ON"; 0 = down, "OFF"). The field
// widths cover a 304 x 240 sensor (the Prophesee GEN1 camera used for the
// evaluation) and a 32-bit microsecond clock; they are this design's choice.
package npu_pkg;

  typedef struct packed {
    logic [31:0] t;
    logic [8:0]  x;
    logic [7:0]  y;
    logic        p;
  } dvs_event_t;

  // What the detection head reports for one window.
  typedef struct packed {
    logic        found;     // at least one grid cell holds an object
    logic [7:0]  n_cells;   // number of occupied cells
    logic [7:0]  x0;        // bounding box of occupied cells, in cells
    logic [7:0]  y0;
    logic [7:0]  x1;
    logic [7:0]  y1;
  } detection_t;

endpackage
