// shift_block: shift operation of shift convolution, with bit-serial output.
//
// Every layer of the network is a shift followed by a pointwise (1x1)
// convolution. The shift moves each input channel's map by at most one
// pixel in a direction fixed for that channel, filling with zeros:
// out(h,w) = in(h+dy, w+dx), or 0 outside the map. The systolic array then
// only has to do the pointwise convolution.
//
// Per channel there is a memory controller and a pair of 8-bit registers (the
// paper's shift-block figure). For each pixel the memory controller turns the
// pixel coordinate and the channel's shift direction into a read address of
// that channel's input-buffer bank, or finds the source outside the map.
// The two registers are used as a double buffer: while one shifts the
// current pixel out LSB first, one bit per cycle, the next pixel is fetched
// into the other. A multiplexer picks the current register, or 0 for a
// padded pixel or when nothing streams.
//
// Controller interface (broadcast to all channels): `fetch` with the
// coordinate (fetch_h, fetch_w) and row-major address fetch_addr of the next
// pixel (fetch_valid low for a padding slot past the last pixel); `swap` on
// the last cycle of a slot makes the fetched register current from the next
// cycle; bit_idx selects the bit output this cycle; out_en gates the output.
// Timing: read data returns one cycle after fetch and is captured then, so
// fetch must come at least two cycles before the swap.
// The register pair, the zero input and per-channel shift control follow the
// paper; the address arithmetic and the handshake with the controller are
// this design's own.
module shift_block
  import cc_pkg::*;
#(
  parameter int NCH   = 256,
  parameter int DEPTH = 1024,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  shift_dir_t        dir [NCH],        // shift control per channel
  input  logic [AW:0]       img_h,            // map height (1..DEPTH)
  input  logic [AW:0]       img_w,            // map width
  input  logic              fetch,
  input  logic              fetch_valid,
  input  logic [AW:0]       fetch_h,
  input  logic [AW:0]       fetch_w,
  input  logic [AW-1:0]     fetch_addr,
  input  logic              swap,
  input  logic [XB_BITS-1:0] bit_idx,
  input  logic              out_en,
  output logic              rd_en   [NCH],
  output logic [AW-1:0]     rd_addr [NCH],
  input  logic [X_BITS-1:0] rd_data [NCH],
  output logic [NCH-1:0]    x_bits
);

  for (genvar m = 0; m < NCH; m++) begin : g_ch
    logic signed [AW+2:0] sh, sw, addr;
    logic                 inb;
    logic [X_BITS-1:0]    regs [2];
    logic                 zero [2];
    logic                 cur, pend, pend_zero;

    // Memory controller: source coordinate, bounds check, address.
    always_comb begin
      sh   = $signed({2'b00, fetch_h}) + (AW+3)'(dir[m].dy);
      sw   = $signed({2'b00, fetch_w}) + (AW+3)'(dir[m].dx);
      inb  = fetch_valid && sh >= 0 && sw >= 0 &&
             sh < $signed({2'b00, img_h}) && sw < $signed({2'b00, img_w});
      addr = $signed({3'b000, fetch_addr}) + (AW+3)'(dir[m].dx);
      if (dir[m].dy == 2'sd1)       addr = addr + $signed({2'b00, img_w});
      else if (dir[m].dy == -2'sd1) addr = addr - $signed({2'b00, img_w});
    end
    assign rd_en[m]   = fetch && inb;
    assign rd_addr[m] = addr[AW-1:0];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        regs[0] <= '0; regs[1] <= '0;
        zero[0] <= 1'b1; zero[1] <= 1'b1;
        cur <= 1'b0; pend <= 1'b0; pend_zero <= 1'b1;
      end else begin
        pend      <= fetch;
        pend_zero <= !inb;
        if (pend) begin
          regs[!cur] <= rd_data[m];
          zero[!cur] <= pend_zero;
        end
        if (swap) cur <= !cur;
      end
    end

    // Output multiplexer: current register bit, or 0.
    assign x_bits[m] = (out_en && !zero[cur]) ? regs[cur][bit_idx] : 1'b0;
  end

endmodule
