// group_router: places row-permuted input channels onto combined columns.
//
// Column combining packs each group of up to ALPHA sparse columns of a
// filter matrix into one array column. Because the rows of the previous
// layer are permuted so that the channels of each group come out next to
// each other, channel streams never have to be reordered: column c simply
// takes the grp_size[c] channels that follow those of columns 0..c-1. The
// router therefore only counts: a running sum of group sizes gives each
// column's first channel, and lane k of column c carries channel
// first_c + k (lanes past the group size carry 0).
//
// Purely combinational. grp_size is part of the layer configuration.
// The counting scheme follows the paper's row-permutation section; realising
// it as a configurable running sum in front of the array is this design's
// choice (the paper suggests a counter in place of a switchbox).
module group_router
  import cc_pkg::*;
#(
  parameter int NCH  = 256,
  parameter int COLS = 32,
  localparam int CW = $clog2(NCH + 1),
  localparam int IW = $clog2(NCH)
) (
  input  logic [NCH-1:0]      ch_bits,
  input  logic [SEL_BITS:0]   grp_size [COLS],   // 0..ALPHA channels per column
  output logic [ALPHA-1:0]    lanes    [COLS]
);

  logic [CW+SEL_BITS:0] first [COLS+1];

  always_comb begin
    first[0] = '0;
    for (int c = 0; c < COLS; c++)
      first[c+1] = first[c] + (CW+SEL_BITS+1)'(grp_size[c]);
    for (int c = 0; c < COLS; c++)
      for (int k = 0; k < ALPHA; k++) begin
        logic [CW+SEL_BITS:0] idx;
        idx = first[c] + (CW+SEL_BITS+1)'(k);
        lanes[c][k] = ((SEL_BITS+1)'(k) < grp_size[c] && idx < (CW+SEL_BITS+1)'(NCH)) ? ch_bits[idx[IW-1:0]] : 1'b0;
      end
  end

endmodule
