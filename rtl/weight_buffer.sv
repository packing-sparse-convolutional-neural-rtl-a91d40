// weight_buffer: on-chip buffer of packed filter matrices.
//
// Each entry is one row of a packed tile: COLS weight-load words (an 8-bit
// weight plus the 3-bit index of the channel it belongs to within its
// combined column). While weights are loaded into the array, one entry is
// read per cycle and pushed into the bottom of every column's load chain.
// Writes fill one column slot of one entry at a time.
//
// Timing: rd_data is valid the cycle after rd_en/rd_addr.
// The paper names the weight buffer only; its organisation and DEPTH = 512
// entries (16 tiles of 32 rows) are this design's choices.
module weight_buffer
  import cc_pkg::*;
#(
  parameter int COLS  = 32,
  parameter int DEPTH = 512,
  localparam int AW  = $clog2(DEPTH),
  localparam int CLW = $clog2(COLS)
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  logic [CLW-1:0] wr_col,
  input  wentry_t        wr_data,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output wentry_t        rd_data [COLS]
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    wentry_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_col == CLW'(c)) mem[wr_addr] <= wr_data;
      if (rd_en) rd_data[c] <= mem[rd_addr];
    end
  end

endmodule
