// cc_system: systolic array system for column-combined sparse CNN layers.
//
// The whole datapath of one layer tile, as in the paper's system figure:
//
//   weight buffer --load chains--> ROWS x COLS array of MX cells
//   input buffer -> shift block -> group router -> skew -> array (bottom)
//   array (right edge) -> ReLU -> quantizer -> output buffer
//
// A layer is a shift followed by a pointwise convolution whose sparse filter
// matrix has been packed by column combining: each array column holds a
// group of up to ALPHA = 8 input channels, each cell one weight and the index
// of its channel. The host fills the input buffer (one bank per channel, in
// group order after row permutation), the weight buffer (packed rows) and the
// configuration, then pulses `start`. The controller loads the packed matrix,
// streams every pixel of the shifted input maps through the array in four
// interleaved bit-serial streams, and the quantized, ReLU'd 8-bit results
// land in the output buffer: bank r holds output channel (array row) r,
// addressed by pixel index. `done` pulses when the last result is written.
//
// Configuration (held stable while busy): npix = img_h*img_w pixels; dir[m]
// the shift of input channel m; grp_size[c] the number of channels combined
// in column c (channels are taken in order, column 0 first); qshift the
// re-quantization shift; wbase the first weight-buffer entry of the tile.
//
// Latency of one operation: ROWS (load) + 8 (prime) + 32*ceil(npix/4)
// (stream) + ROWS + COLS + 80 (drain) cycles.
//
// Follows the paper: the block structure, MX cells with 4-way interleaving
// and 8-channel multiplexing, 8-bit data and weights, 32-bit serial
// accumulation, bit-serial ReLU, shift block with double-buffered registers.
// This design's own: the controller, load chains, sideband framing, buffer
// sizes and organisation, the quantizer's rule, the routing by running sum.
// Not built: accumulating partial sums over several column tiles (row inputs
// are tied to zero, so a layer must fit one tile in its columns), overlapping
// the next tile's weight load with streaming, and cross-layer pipelining.
module cc_system
  import cc_pkg::*;
#(
  parameter int ROWS     = 32,
  parameter int COLS     = 32,
  parameter int NCH      = COLS * ALPHA,
  parameter int DEPTH    = 1024,
  parameter int WB_DEPTH = 512,
  localparam int AW  = $clog2(DEPTH),
  localparam int WAW = $clog2(WB_DEPTH),
  localparam int CHW = $clog2(NCH),
  localparam int CLW = $clog2(COLS),
  localparam int RW  = $clog2(ROWS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // operation
  input  logic               start,
  output logic               busy,
  output logic               done,
  // layer configuration
  input  logic [AW:0]        img_h,
  input  logic [AW:0]        img_w,
  input  logic [AW:0]        npix,
  input  logic [WAW-1:0]     wbase,
  input  logic [PH_BITS-1:0] qshift,
  input  logic [SEL_BITS:0]  grp_size [COLS],
  input  shift_dir_t         dir      [NCH],
  // input buffer fill
  input  logic               ib_wr_en,
  input  logic [CHW-1:0]     ib_wr_ch,
  input  logic [AW-1:0]      ib_wr_addr,
  input  logic [X_BITS-1:0]  ib_wr_data,
  // weight buffer fill
  input  logic               wb_wr_en,
  input  logic [WAW-1:0]     wb_wr_addr,
  input  logic [CLW-1:0]     wb_wr_col,
  input  wentry_t            wb_wr_data,
  // output buffer read
  input  logic               ob_rd_en,
  input  logic [RW-1:0]      ob_rd_row,
  input  logic [AW-1:0]      ob_rd_addr,
  output logic [X_BITS-1:0]  ob_rd_data
);

  // ---------------- controller ----------------
  logic               op_start, wb_rd_en, wl_en;
  logic [WAW-1:0]     wb_rd_addr;
  logic               fetch, fetch_valid, swap, out_en;
  logic [AW:0]        fetch_h, fetch_w;
  logic [AW-1:0]      fetch_addr;
  logic [XB_BITS-1:0] bit_idx;
  xside_t             xs0;

  cc_controller #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .WB_DEPTH(WB_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .npix, .img_w, .wbase, .busy, .done, .op_start,
    .wb_rd_en, .wb_rd_addr, .wl_en,
    .fetch, .fetch_valid, .fetch_h, .fetch_w, .fetch_addr, .swap, .bit_idx, .out_en,
    .xs (xs0)
  );

  // ---------------- weight buffer ----------------
  wentry_t wl_in [COLS];

  weight_buffer #(.COLS(COLS), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk, .wr_en (wb_wr_en), .wr_addr (wb_wr_addr), .wr_col (wb_wr_col), .wr_data (wb_wr_data),
    .rd_en (wb_rd_en), .rd_addr (wb_rd_addr), .rd_data (wl_in)
  );

  // ---------------- input buffer + shift block ----------------
  logic              ib_rd_en   [NCH];
  logic [AW-1:0]     ib_rd_addr [NCH];
  logic [X_BITS-1:0] ib_rd_data [NCH];
  logic [NCH-1:0]    ch_bits;

  input_buffer #(.NCH(NCH), .DEPTH(DEPTH)) u_ibuf (
    .clk, .wr_en (ib_wr_en), .wr_ch (ib_wr_ch), .wr_addr (ib_wr_addr), .wr_data (ib_wr_data),
    .rd_en (ib_rd_en), .rd_addr (ib_rd_addr), .rd_data (ib_rd_data)
  );

  shift_block #(.NCH(NCH), .DEPTH(DEPTH)) u_shift (
    .clk, .rst_n, .dir, .img_h, .img_w,
    .fetch, .fetch_valid, .fetch_h, .fetch_w, .fetch_addr, .swap, .bit_idx, .out_en,
    .rd_en (ib_rd_en), .rd_addr (ib_rd_addr), .rd_data (ib_rd_data), .x_bits (ch_bits)
  );

  // ---------------- group router + input skew ----------------
  logic [ALPHA-1:0] lanes [COLS];
  logic [ALPHA-1:0] x_in  [COLS];
  xside_t           xs_in [COLS];

  group_router #(.NCH(NCH), .COLS(COLS)) u_route (
    .ch_bits, .grp_size, .lanes
  );

  // Column c is delayed by c cycles so that data meets the partial sums
  // moving right through the array at the right cell and cycle.
  for (genvar c = 0; c < COLS; c++) begin : g_skew
    if (c == 0) begin : g_direct
      assign x_in[c]  = lanes[c];
      assign xs_in[c] = xs0;
    end else begin : g_delay
      logic [ALPHA-1:0] xd  [c];
      xside_t           xsd [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) begin xd[i] <= '0; xsd[i] <= '0; end
        end else begin
          xd[0]  <= lanes[c];
          xsd[0] <= xs0;
          for (int i = 1; i < c; i++) begin xd[i] <= xd[i-1]; xsd[i] <= xsd[i-1]; end
        end
      end
      assign x_in[c]  = xd[c-1];
      assign xs_in[c] = xsd[c-1];
    end
  end

  // ---------------- systolic array ----------------
  logic [IL-1:0] y_in  [ROWS];
  logic [IL-1:0] y_out [ROWS];
  xside_t        ys_out[ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_yin
    assign y_in[r] = '0;   // single tile: accumulation starts from zero
  end

  mx_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .x_in, .xs_in, .y_in, .y_out, .ys_out, .wl_en, .wl_in
  );

  // ---------------- ReLU, quantizer, output write ----------------
  logic              ob_wr_en   [ROWS];
  logic [AW-1:0]     ob_wr_addr [ROWS];
  logic [X_BITS-1:0] ob_wr_data [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_out
    logic              q_stb [IL];
    logic              q_vld [IL];
    logic [X_BITS-1:0] q     [IL];
    logic [AW-1:0]     gcnt;   // groups of this row written so far

    for (genvar j = 0; j < IL; j++) begin : g_stream
      logic rs, rv, rb;
      relu_serial u_relu (
        .clk, .rst_n,
        .start     (ys_out[r].run && ys_out[r].phase == PH_BITS'(j * X_BITS)),
        .in_valid  (ys_out[r].valid),
        .in_bit    (y_out[r][j]),
        .out_start (rs), .out_valid (rv), .out_bit (rb)
      );
      quantizer u_quant (
        .clk, .rst_n, .start (rs), .in_valid (rv), .in_bit (rb), .qshift,
        .q_stb (q_stb[j]), .q_valid (q_vld[j]), .q (q[j])
      );
    end

    // The IL streams of a row finish 8 cycles apart: at most one strobe per cycle.
    always_comb begin
      ob_wr_en[r]   = 1'b0;
      ob_wr_addr[r] = '0;
      ob_wr_data[r] = '0;
      for (int j = 0; j < IL; j++)
        if (q_stb[j]) begin
          ob_wr_en[r]   = q_vld[j];
          ob_wr_addr[r] = AW'(gcnt * IL + j);
          ob_wr_data[r] = q[j];
        end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)              gcnt <= '0;
      else if (op_start)       gcnt <= '0;
      else if (q_stb[IL-1])    gcnt <= gcnt + 1'b1;
    end
  end

  output_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) u_obuf (
    .clk, .wr_en (ob_wr_en), .wr_addr (ob_wr_addr), .wr_data (ob_wr_data),
    .rd_en (ob_rd_en), .rd_row (ob_rd_row), .rd_addr (ob_rd_addr), .rd_data (ob_rd_data)
  );

endmodule
