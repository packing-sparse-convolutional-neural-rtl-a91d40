// tb_mx_cell: self-checking test of one MX cell.
// Streams random 8-channel data in four interleaved 8-cycle slots per
// 32-cycle group, with random incoming 32-bit accumulations on the four y
// lines. A new weight and channel select is shifted into the shadow register
// while the previous group computes, and committed at the next group start.
// Checks every output word against y + x[sel]*w, the one-cycle data and
// sideband forwarding, and the weight-load chain output.
module tb_mx_cell;
  import cc_pkg::*;

  localparam int G = 40;                 // groups
  localparam int T = (G + 2) * ACC_BITS; // driven cycles

  logic clk = 0, rst_n = 0;
  logic [ALPHA-1:0] x_in, x_out;
  xside_t xs_in, xs_out;
  logic [IL-1:0] y_in, y_out;
  logic wl_en;
  wentry_t wl_in, wl_out;
  int checks = 0, failures = 0;

  mx_cell dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [X_BITS-1:0]   xd [G][IL][ALPHA];
  logic [ACC_BITS-1:0] yd [G+2][IL];
  wentry_t             we [G];
  logic [ACC_BITS-1:0] got [G+2][IL];

  initial begin
    for (int g = 0; g < G; g++) begin
      we[g].w   = W_BITS'($urandom);
      we[g].sel = SEL_BITS'($urandom);
      for (int j = 0; j < IL; j++)
        for (int c = 0; c < ALPHA; c++) xd[g][j][c] = X_BITS'($urandom);
    end
    for (int g = 0; g < G + 2; g++)
      for (int j = 0; j < IL; j++) yd[g][j] = $urandom;

    x_in = 0; xs_in = '0; y_in = 0; wl_en = 0; wl_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Preload weight of group 0.
    @(negedge clk); wl_en = 1; wl_in = we[0];
    @(negedge clk); wl_en = 0;
    if (wl_out !== we[0]) failures++;
    checks++;

    // t counts cycles from the first group start.
    for (int t = 0; t < T; t++) begin
      int g, p;
      g = t / ACC_BITS; p = t % ACC_BITS;
      // drive
      xs_in.phase  = PH_BITS'(p);
      xs_in.commit = (p == 0) && (g < G);
      xs_in.valid  = 1'b1;
      xs_in.run    = 1'b1;
      for (int c = 0; c < ALPHA; c++)
        x_in[c] = (g < G) ? xd[g][p / X_BITS][c][p % X_BITS] : 1'b0;
      for (int j = 0; j < IL; j++) begin
        int tt;
        tt = t - j * X_BITS;
        y_in[j] = (tt >= 0) ? yd[tt / ACC_BITS][j][tt % ACC_BITS] : 1'b0;
      end
      // load next group's weight during this group
      wl_en = (p == 5) && (g + 1 < G);
      wl_in = (g + 1 < G) ? we[g+1] : '0;
      @(negedge clk);
      // sample outputs of the cycle just clocked
      if (x_out !== x_in || xs_out !== xs_in) begin
        failures++;
        if (failures < 5) $display("t=%0d forwarding mismatch", t);
      end
      checks++;
      for (int j = 0; j < IL; j++) begin
        int tt;
        tt = t - j * X_BITS;
        if (tt >= 0) got[tt / ACC_BITS][j][tt % ACC_BITS] = y_out[j];
      end
    end
    for (int g = 0; g < G; g++)
      for (int j = 0; j < IL; j++) begin
        logic [ACC_BITS-1:0] exp;
        exp = yd[g][j] + ACC_BITS'($signed({1'b0, xd[g][j][we[g].sel]}) * we[g].w);
        checks++;
        if (got[g][j] !== exp) begin
          failures++;
          if (failures < 10) $display("g=%0d j=%0d got %h exp %h", g, j, got[g][j], exp);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
