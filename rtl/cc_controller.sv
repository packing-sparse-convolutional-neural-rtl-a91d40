// cc_controller: sequences one packed tile through the systolic array.
//
// One operation (started by `start`) computes a whole layer tile, a packed
// filter matrix of at most ROWS filters and COLS combined columns, over all
// npix pixels of the input maps:
//  1. LOAD   ROWS cycles: reads weight-buffer entries wbase+ROWS-1 down to
//            wbase (one packed-matrix row each) and, one cycle later, pushes
//            them into the array's column load chains, so the entry at wbase
//            ends up in row 0.
//  2. PRIME  8 cycles: the shift block fetches pixel 0 into its registers.
//  3. STREAM ceil(npix/4) groups of 32 cycles. Pixel p uses slot p of the
//            stream: group p/4, interleaved stream p%4, cycles 8*(p%4) ..
//            8*(p%4)+7 of the group, LSB first. During each slot the shift
//            block fetches the next pixel; the registers swap on the slot's
//            last cycle. The first cycle carries `commit`, so every cell
//            switches to the new weights as the data reaches it. Slots past
//            the last pixel are streamed as zeros with valid low.
//  4. DRAIN  until the last result has passed the array, ReLU and quantizer
//            (ROWS + COLS + 2*32 cycles plus margin), then `done` pulses.
// The paper describes the order of these steps (weights loaded into the
// array, then data streamed through the shift block, results through ReLU
// and quantizer into the output buffer) but not a controller; this FSM, its
// timing and its interface are this design's own. Loading the next tile
// while the current one streams (which the cells support) is not scheduled
// by this controller: it handles one tile per operation.
module cc_controller
  import cc_pkg::*;
#(
  parameter int ROWS     = 32,
  parameter int COLS     = 32,
  parameter int DEPTH    = 1024,
  parameter int WB_DEPTH = 512,
  localparam int AW  = $clog2(DEPTH),
  localparam int WAW = $clog2(WB_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [AW:0]        npix,     // pixels per map (1..DEPTH)
  input  logic [AW:0]        img_w,
  input  logic [WAW-1:0]     wbase,
  output logic               busy,
  output logic               done,
  output logic               op_start, // one-cycle pulse when an operation begins
  // weight buffer and array load chain
  output logic               wb_rd_en,
  output logic [WAW-1:0]     wb_rd_addr,
  output logic               wl_en,
  // shift block
  output logic               fetch,
  output logic               fetch_valid,
  output logic [AW:0]        fetch_h,
  output logic [AW:0]        fetch_w,
  output logic [AW-1:0]      fetch_addr,
  output logic               swap,
  output logic [XB_BITS-1:0] bit_idx,
  output logic               out_en,
  // sideband for column 0 (skewed by the caller)
  output xside_t             xs
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_PRIME, S_STREAM, S_DRAIN} state_t;
  localparam int DRAIN_CYC = ROWS + COLS + 2 * ACC_BITS + 16;

  state_t      state;
  logic [31:0] cnt;        // cycle counter within the state
  logic [AW:0] nslots;     // slots streamed = 4 * ceil(npix/4)
  logic [AW:0] slot;       // pixel slot being output
  logic [AW:0] fidx;       // pixel index being fetched

  assign busy    = (state != S_IDLE);
  assign bit_idx = cnt[XB_BITS-1:0];
  assign slot    = (AW+1)'(cnt >> XB_BITS);
  assign out_en  = (state == S_STREAM);

  // Load: read in LOAD, push into the array one cycle later.
  assign wb_rd_en   = (state == S_LOAD);
  assign wb_rd_addr = wbase + WAW'(ROWS - 1) - WAW'(cnt);

  // Fetch the next pixel on cycle 1 of every slot, swap on cycle 7.
  assign fetch       = (state == S_PRIME || state == S_STREAM) && (bit_idx == XB_BITS'(1));
  assign fetch_valid = (fidx < npix);
  assign swap        = (state == S_PRIME || state == S_STREAM) && (bit_idx == XB_BITS'(X_BITS - 1));

  always_comb begin
    xs = '0;
    if (state == S_STREAM) begin
      xs.run    = 1'b1;
      xs.phase  = cnt[PH_BITS-1:0];
      xs.valid  = (slot < npix);
      xs.commit = (cnt == 0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; nslots <= '0;
      wl_en <= 1'b0; done <= 1'b0; op_start <= 1'b0;
      fidx <= '0; fetch_h <= '0; fetch_w <= '0; fetch_addr <= '0;
    end else begin
      wl_en    <= wb_rd_en;
      done     <= 1'b0;
      op_start <= 1'b0;
      cnt      <= cnt + 1;
      if (fetch) begin
        fidx       <= fidx + 1'b1;
        fetch_addr <= fetch_addr + 1'b1;
        if (fetch_w + 1'b1 == img_w) begin
          fetch_w <= '0;
          fetch_h <= fetch_h + 1'b1;
        end else begin
          fetch_w <= fetch_w + 1'b1;
        end
      end
      unique case (state)
        S_IDLE: begin
          cnt <= '0;
          if (start) begin
            state    <= S_LOAD;
            op_start <= 1'b1;
            nslots   <= (npix + (AW+1)'(IL - 1)) & ~(AW+1)'(IL - 1);
            fidx <= '0; fetch_h <= '0; fetch_w <= '0; fetch_addr <= '0;
          end
        end
        S_LOAD:   if (cnt == ROWS - 1) begin state <= S_PRIME; cnt <= '0; end
        S_PRIME:  if (cnt == X_BITS - 1) begin state <= S_STREAM; cnt <= '0; end
        S_STREAM: if (cnt == 32'(nslots) * X_BITS - 1) begin state <= S_DRAIN; cnt <= '0; end
        S_DRAIN:  if (cnt == DRAIN_CYC - 1) begin state <= S_IDLE; cnt <= '0; done <= 1'b1; end
        default:  state <= S_IDLE;
      endcase
    end
  end

  a_npix_nonzero: assert property (@(posedge clk) disable iff (!rst_n) start |-> npix != 0);

endmodule
