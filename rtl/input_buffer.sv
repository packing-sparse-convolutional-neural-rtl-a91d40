// input_buffer: on-chip buffer of the layer's input feature maps.
//
// One bank per input channel (the paper's input-buffer figure draws one
// memory column x_{m,1}, x_{m,2}, ... per channel m), each holding DEPTH
// 8-bit values of that channel's map in row-major order (addr = h*W + w).
// Every bank has its own synchronous read port, driven by that channel's
// memory controller in the shift block, so all channels are read in the same
// cycle. One shared write port fills the banks from outside (for example from
// the output buffer of the previous layer, or from the host).
//
// Timing: rd_data[m] is valid the cycle after rd_en[m]/rd_addr[m].
// Sizes are this design's choice: NCH = COLS*ALPHA = 256 channels (enough for
// a full tile of 32 combined columns) and DEPTH = 1024 (a 32x32 map).
module input_buffer
  import cc_pkg::*;
#(
  parameter int NCH   = 256,
  parameter int DEPTH = 1024,
  localparam int CW = $clog2(NCH),
  localparam int AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [CW-1:0]     wr_ch,
  input  logic [AW-1:0]     wr_addr,
  input  logic [X_BITS-1:0] wr_data,
  input  logic              rd_en   [NCH],
  input  logic [AW-1:0]     rd_addr [NCH],
  output logic [X_BITS-1:0] rd_data [NCH]
);

  for (genvar m = 0; m < NCH; m++) begin : g_bank
    logic [X_BITS-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_ch == CW'(m)) mem[wr_addr] <= wr_data;
      if (rd_en[m]) rd_data[m] <= mem[rd_addr[m]];
    end
  end

endmodule
