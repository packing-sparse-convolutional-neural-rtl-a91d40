// mx_cell: multiplexed-input (MX) systolic cell.
//
// The cell of the column-combined systolic array. It receives the bit-serial
// data of up to ALPHA input channels from below (one bit per channel per
// cycle), forwards all of them to the cell above through one register each,
// and multiplies the single channel its stored weight belongs to. After
// column combining, each cell of a combined column holds the one surviving
// weight of its row, together with the index of the channel that weight came
// from; that index drives the channel multiplexer.
//
// Because 32-bit bit-serial accumulation takes four times as long as an 8-bit
// input word, the cell holds IL = 4 MACs that work on four interleaved data
// streams. Stream j owns the input slot of phase 8j..8j+7 of each 32-cycle
// group, and its 32-bit accumulation word enters on y_in[j] starting at phase
// 8j. The channel selected by the weight is steered to MAC j only during
// slot j; all four MACs use the same weight.
//
// Interface and timing:
//  * x_in/xs_in -> x_out/xs_out: data bits and sideband, one-cycle register.
//  * y_in[j] -> y_out[j]: one-cycle latency through MAC j.
//  * Weight loading: wl_in shifts into the shadow register when wl_en is
//    high; wl_out is the shadow register, feeding the cell above, so a column
//    of cells forms a load chain. When xs_in.commit is high (it is asserted
//    only at phase 0) the shadow weight becomes the cell's active weight. Each
//    MAC captures the active weight at the start of its own word, so loading
//    the next tile's weights overlaps computation and the switch happens
//    cleanly between groups.
// The MX cell structure follows the paper; the sideband, the shadow/active
// weight pair and the commit rule are this design's own choices.
module mx_cell
  import cc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ALPHA-1:0] x_in,
  input  xside_t           xs_in,
  output logic [ALPHA-1:0] x_out,
  output xside_t           xs_out,
  input  logic [IL-1:0]    y_in,
  output logic [IL-1:0]    y_out,
  input  logic             wl_en,
  input  wentry_t          wl_in,
  output wentry_t          wl_out
);

  wentry_t shadow_q, active_q, active_d;
  logic    x_sel;

  assign wl_out   = shadow_q;
  assign active_d = xs_in.commit ? shadow_q : active_q;
  assign x_sel    = x_in[active_d.sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow_q <= '0;
      active_q <= '0;
      x_out    <= '0;
      xs_out   <= '0;
    end else begin
      if (wl_en) shadow_q <= wl_in;
      active_q <= active_d;
      x_out    <= x_in;
      xs_out   <= xs_in;
    end
  end

  for (genvar j = 0; j < IL; j++) begin : g_mac
    logic in_slot, start;
    assign in_slot = (xs_in.phase[PH_BITS-1:XB_BITS] == (PH_BITS-XB_BITS)'(j));
    assign start   = (xs_in.phase == PH_BITS'(j * X_BITS));
    bitserial_mac u_mac (
      .clk   (clk),
      .rst_n (rst_n),
      .start (start),
      .w     (active_d.w),
      .x_bit (x_sel & in_slot),
      .y_in  (y_in[j]),
      .y_out (y_out[j])
    );
  end

  // Commit must fall on a group boundary so no MAC switches mid-word.
  a_commit_phase0: assert property (@(posedge clk) disable iff (!rst_n)
    xs_in.commit |-> xs_in.phase == '0);

endmodule
