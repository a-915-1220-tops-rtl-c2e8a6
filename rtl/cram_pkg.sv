// cram_pkg: types and constants shared by the EBBI processor blocks.
// The array size (320 x 240) and the 128 x 32-bit event buffer follow the
// chip; the object list size, the box layout and the configuration record
// are this design's own choices. Line configuration codes {PU, PD} are the
// ones printed in the chip's projection-line table: pull-down = 11,
// pull-up = 00, floating = 10 (PU drives a PMOS, so it is active low).
package cram_pkg;
  localparam int unsigned ARR_W   = 320;  // columns (x)
  localparam int unsigned ARR_H   = 240;  // rows (y)
  localparam int unsigned X_W     = 9;    // bits of an x coordinate
  localparam int unsigned Y_W     = 8;    // bits of a y coordinate
  localparam int unsigned VW      = 8;    // model resolution of a cell / line voltage
  localparam int unsigned MAX_OBJ = 16;   // entries of an object list
  localparam int unsigned OBJ_W   = $clog2(MAX_OBJ + 1);

  // Operation modes of the controller.
  typedef enum logic [1:0] {
    MODE_CLEAR = 2'd0,
    MODE_WRITE = 2'd1,
    MODE_IR    = 2'd2,
    MODE_RP    = 2'd3
  } mode_e;

  // Bounding box, inclusive coordinates.
  typedef struct packed {
    logic [X_W-1:0] x0;
    logic [X_W-1:0] x1;
    logic [Y_W-1:0] y0;
    logic [Y_W-1:0] y1;
  } box_t;

  // Run-time configuration ("config" input of the controller).
  typedef struct packed {
    logic [7:0]  de_width;   // DE pulse width in clock cycles (>= 1)
    logic [3:0]  de_pulses;  // number of DE pulses per IR operation
    logic [1:0]  de_amp;     // DE pulse amplitude code
    logic [3:0]  vref;       // code of the 4-bit Vref DAC
    logic [3:0]  t_proj;     // projection (pull-up) time in cycles (>= 1)
    logic [15:0] size_min;   // RP update: objects of size <= size_min are noise
    logic [7:0]  slot;       // RP update: merge when both gaps < slot
  } cfg_t;

  // Projection-line configuration {PU, PD}.
  localparam logic [1:0] PL_PULL_DOWN = 2'b11;
  localparam logic [1:0] PL_PULL_UP   = 2'b00;
  localparam logic [1:0] PL_FLOAT     = 2'b10;
endpackage
