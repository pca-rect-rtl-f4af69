// pcarect_pkg: types and default sizes shared by the event-based
// categorisation / detection pipeline.
//
// The numbers that come from the design description are: 8-bit pixel
// coordinates, a 240 x 180 sensor, a 14-bit sub-sampled cell address made of
// two 7-bit halves, a 49-bit k-d tree node {type 1, left 12, right 12,
// index 12, threshold 6, descriptor index 6}, an event window of 5000 events,
// a 950-word dictionary, 4 classes, a classification window of 10^5 events
// and the 5 ms / 1 ms filter thresholds.  Timestamp width, weight width and
// the field-to-bit order of the node word (left-most field in the MSBs) are
// this design's own choices.
package pcarect_pkg;

  // ---- sensor / event ----------------------------------------------------
  localparam int unsigned COORD_W   = 8;     // x and y are 8-bit each
  localparam int unsigned TS_W      = 32;    // timestamp in microseconds
  localparam int unsigned SENSOR_W  = 240;   // DAVIS columns
  localparam int unsigned SENSOR_H  = 180;   // DAVIS rows

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [TS_W-1:0]    t;
  } event_t;

  // ---- filters (microseconds) ---------------------------------------------
  localparam int unsigned THETA_NOISE = 5000;  // 5 ms
  localparam int unsigned THETA_REF   = 1000;  // 1 ms

  // ---- sub-sampled cell-count matrix --------------------------------------
  localparam int unsigned SUB_W     = 7;             // per coordinate
  localparam int unsigned CELL_AW   = 2 * SUB_W;     // 14-bit {y_sub, x_sub}
  localparam int unsigned WINDOW_S  = 5000;          // event FIFO size s
  localparam int unsigned CNT_W     = $clog2(WINDOW_S); // log(s) = 13 bits
  localparam int unsigned PATCH     = 7;             // descriptor is PATCH x PATCH cells

  // ---- k-d tree node word (49 bits) ---------------------------------------
  localparam int unsigned PTR_W     = 12;
  localparam int unsigned IDX_W     = 12;
  localparam int unsigned THR_W     = 6;
  localparam int unsigned DIM_W     = 6;
  localparam int unsigned DICT_K    = 950;           // dictionary size = leaves
  localparam int unsigned NUM_NODES = 2 * DICT_K - 1;

  typedef struct packed {
    logic             is_leaf;    // Type
    logic [PTR_W-1:0] left;       // Left Node
    logic [PTR_W-1:0] right;      // Right Node
    logic [IDX_W-1:0] index;      // Index Output (dictionary word)
    logic [THR_W-1:0] threshold;  // split value
    logic [DIM_W-1:0] dim;        // Desc. Index (split dimension)
  } kd_node_t;

  localparam int unsigned NODE_W = $bits(kd_node_t);  // 49

  // ---- classifier / detector ----------------------------------------------
  localparam int unsigned NUM_CLASSES = 4;
  localparam int unsigned WEIGHT_W    = 16;
  localparam int unsigned CLASS_S     = 100000;      // events per decision window
  localparam int unsigned HM_AW       = 2 * COORD_W; // {y, x}
  localparam int unsigned MEAN_DEPTH  = 1024;

endpackage
