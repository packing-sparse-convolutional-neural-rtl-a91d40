// output_buffer: on-chip buffer of quantized layer outputs.
//
// One bank per array row (one output channel per row), DEPTH 8-bit values
// each, addressed by pixel index. Every bank has its own write port, fed by
// that row's quantizers; the four interleaved streams of a row finish 8
// cycles apart, so one write per bank per cycle suffices. A single read port
// lets the outputs be fetched (by a host, or to refill the input buffer for
// the next layer).
//
// Timing: rd_data is valid the cycle after rd_en. Sizes (ROWS banks of
// DEPTH = 1024) are this design's choices; the paper only names the block.
module output_buffer
  import cc_pkg::*;
#(
  parameter int ROWS  = 32,
  parameter int DEPTH = 1024,
  localparam int RW = $clog2(ROWS),
  localparam int AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en   [ROWS],
  input  logic [AW-1:0]     wr_addr [ROWS],
  input  logic [X_BITS-1:0] wr_data [ROWS],
  input  logic              rd_en,
  input  logic [RW-1:0]     rd_row,
  input  logic [AW-1:0]     rd_addr,
  output logic [X_BITS-1:0] rd_data
);

  logic [X_BITS-1:0] bank_q [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_bank
    logic [X_BITS-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en[r]) mem[wr_addr[r]] <= wr_data[r];
      if (rd_en && rd_row == RW'(r)) bank_q[r] <= mem[rd_addr];
    end
  end

  logic [RW-1:0] rd_row_q;
  always_ff @(posedge clk) if (rd_en) rd_row_q <= rd_row;
  assign rd_data = bank_q[rd_row_q];

endmodule
