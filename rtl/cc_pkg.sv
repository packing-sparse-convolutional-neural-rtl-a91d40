// cc_pkg: shared types and constants of the column-combining bit-serial
// systolic array system.
//
// Word lengths follow the design's main configuration: 8-bit input data,
// 8-bit filter weights and 32-bit bit-serial accumulation. Because a 32-bit
// accumulation takes four times as long as an 8-bit input word takes to
// arrive, every systolic cell interleaves IL = ACC_BITS / X_BITS = 4
// independent data streams, each owning one 8-cycle slot of a 32-cycle
// "group". A multiplexed (MX) cell can take up to ALPHA = 8 input channels,
// the largest group of combined columns.
//
// The sideband record xside_t travels with the input data (bottom to top)
// and is this design's own way of telling every cell where in the group it is.
package cc_pkg;

  localparam int X_BITS    = 8;                   // input data word (bits)
  localparam int W_BITS    = 8;                   // filter weight (two's complement)
  localparam int ACC_BITS  = 32;                  // accumulation word (bits)
  localparam int IL        = ACC_BITS / X_BITS;   // interleaved streams per cell
  localparam int ALPHA     = 8;                   // channels per MX cell (max columns per group)
  localparam int SEL_BITS  = $clog2(ALPHA);       // channel select of a cell
  localparam int PH_BITS   = $clog2(ACC_BITS);    // phase within a 32-cycle group
  localparam int XB_BITS   = $clog2(X_BITS);      // bit index within an input word

  // Weight-load word for one cell: the weight and which of the ALPHA
  // multiplexed input channels it multiplies.
  typedef struct packed {
    logic [SEL_BITS-1:0]      sel;
    logic signed [W_BITS-1:0] w;
  } wentry_t;

  // Sideband that moves with the input data through every column.
  typedef struct packed {
    logic               run;     // a whole group of real or padding slots is streaming
    logic               valid;   // this slot carries a real pixel
    logic               commit;  // switch cells to the newly loaded weights (phase 0 only)
    logic [PH_BITS-1:0] phase;   // cycle within the 32-cycle group
  } xside_t;

  // Shift direction of one input channel: out(h,w) = in(h+dy, w+dx).
  typedef struct packed {
    logic signed [1:0] dy;
    logic signed [1:0] dx;
  } shift_dir_t;

endpackage
