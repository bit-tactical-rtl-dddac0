// tcl_pkg: constants and types shared by the TCLp accelerator.
//
// Default sizes are those of the evaluated configuration: 4 tiles, 16 filters
// per tile, 16 weight lanes per filter, 16 concurrent windows, lookahead h=2
// and lookaside d=5 (an 8-input weight-select multiplexer).  The layer
// descriptor and its field widths are this design's own choice; the paper does
// not define a programming interface.
package tcl_pkg;

  localparam int unsigned ACT_W   = 16;  // activation width (16-bit fixed point)
  localparam int unsigned WGT_W   = 16;  // weight width
  localparam int unsigned PREC_W  = 5;   // precision 0..16
  localparam int unsigned BIT_W   = 4;   // bit position 0..15
  localparam int unsigned STEP_W  = 16;  // dense step index within a window group
  localparam int unsigned AM_AW   = 15;  // brick address in one AM slice (32768 bricks = 1MB)
  localparam int unsigned WM_AW   = 12;  // column address in one WM (4096 columns = 2MB of weights)
  localparam int unsigned ACC_W   = 40;  // inner-product accumulator width

  // Layer descriptor, programmed once per layer (and per filter group).
  typedef struct packed {
    logic [15:0]      ax;        // input width  (x)
    logic [15:0]      ay;        // input height (y)
    logic [7:0]       cb;        // input channel bricks, ceil(C/16)
    logic [7:0]       fx;        // filter width
    logic [7:0]       fy;        // filter height
    logic [3:0]       stride;    // S
    logic [15:0]      ox;        // output width  = (ax-fx)/S+1
    logic [15:0]      oy;        // output height = (ay-fy)/S+1
    logic [4:0]       prec;      // profile-derived activation precision, 1..16
    logic [5:0]       out_shift; // fixed-point scaling of the accumulators
    logic [7:0]       out_cbs;   // output bricks per (x,y) per AM slice
    logic [7:0]       fgroup;    // filter group run by this pass
    logic [AM_AW-1:0] in_base;   // input array base in every AM slice
    logic [AM_AW-1:0] out_base;  // output array base in every AM slice
    logic [WM_AW-1:0] wm_base;   // first schedule column in every WM
  } layer_t;

  // Bricks per (x,y) position held by one slice when CB bricks are spread
  // over `tiles` slices (brick cb lives in slice cb mod tiles).
  function automatic logic [7:0] bricks_per_slice(input logic [7:0] cb, input int unsigned tiles);
    return 8'((int'(cb) + tiles - 1) / tiles);
  endfunction

  // Dense steps of one window group: fx * fy * cb.
  function automatic logic [STEP_W-1:0] layer_steps(input logic [7:0] fx, input logic [7:0] fy,
                                                    input logic [7:0] cb);
    return STEP_W'(fx * fy * cb);
  endfunction

endpackage
