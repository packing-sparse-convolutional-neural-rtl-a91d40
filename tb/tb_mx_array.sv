// tb_mx_array: self-checking test of the MX systolic array at a reduced
// size (ROWS=4, COLS=3). Every group uses a new random packed filter matrix
// (weight and channel select per cell), loaded through the column load
// chains while the previous group computes and committed with the skewed
// sideband. Checks each row's four interleaved result words against the
// matrix product plus the incoming partial sums, and the r + COLS latency
// (the output sideband phase must line up with the result words).
module tb_mx_array;
  import cc_pkg::*;

  localparam int ROWS = 4, COLS = 3, G = 30;
  localparam int T = (G + 2) * ACC_BITS + ROWS + COLS + 2;

  logic clk = 0, rst_n = 0;
  logic [ALPHA-1:0] x_in [COLS];
  xside_t xs_in [COLS];
  logic [IL-1:0] y_in [ROWS], y_out [ROWS];
  xside_t ys_out [ROWS];
  logic wl_en;
  wentry_t wl_in [COLS];
  int checks = 0, failures = 0;

  mx_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [X_BITS-1:0]   xd [G][IL][COLS][ALPHA];
  logic [ACC_BITS-1:0] yd [G+2][IL][ROWS];
  wentry_t             we [G][ROWS][COLS];
  logic [ACC_BITS-1:0] got [G+2][IL][ROWS];

  // Bit of column c's input stream at base time tau.
  function automatic logic xbit(int tau, int c, int ch);
    int g, p;
    if (tau < 0) return 1'b0;
    g = tau / ACC_BITS; p = tau % ACC_BITS;
    if (g >= G) return 1'b0;
    return xd[g][p / X_BITS][c][ch][p % X_BITS];
  endfunction

  function automatic logic ybit(int tau, int r, int j);
    int tt;
    tt = tau - j * X_BITS;
    if (tt < 0 || tt / ACC_BITS >= G + 2) return 1'b0;
    return yd[tt / ACC_BITS][j][r][tt % ACC_BITS];
  endfunction

  initial begin
    for (int g = 0; g < G; g++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          we[g][r][c].w = W_BITS'($urandom);
          we[g][r][c].sel = SEL_BITS'($urandom);
        end
      for (int j = 0; j < IL; j++)
        for (int c = 0; c < COLS; c++)
          for (int ch = 0; ch < ALPHA; ch++) xd[g][j][c][ch] = X_BITS'($urandom);
    end
    for (int g = 0; g < G + 2; g++)
      for (int j = 0; j < IL; j++)
        for (int r = 0; r < ROWS; r++) yd[g][j][r] = $urandom;

    for (int c = 0; c < COLS; c++) begin x_in[c] = 0; xs_in[c] = '0; wl_in[c] = '0; end
    for (int r = 0; r < ROWS; r++) y_in[r] = 0;
    wl_en = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Preload group 0: push top row first.
    for (int k = 0; k < ROWS; k++) begin
      @(negedge clk);
      wl_en = 1;
      for (int c = 0; c < COLS; c++) wl_in[c] = we[0][ROWS-1-k][c];
    end
    @(negedge clk); wl_en = 0;

    for (int t = 0; t < T; t++) begin
      int p, g;
      g = t / ACC_BITS; p = t % ACC_BITS;
      for (int c = 0; c < COLS; c++) begin
        int tau, gc;
        tau = t - c;
        gc = (tau >= 0) ? tau / ACC_BITS : -1;
        xs_in[c].phase  = PH_BITS'((tau >= 0) ? tau % ACC_BITS : 0);
        xs_in[c].commit = (tau >= 0) && (tau % ACC_BITS == 0) && (gc < G);
        xs_in[c].valid  = (tau >= 0) && (gc < G);
        xs_in[c].run    = xs_in[c].valid;
        for (int ch = 0; ch < ALPHA; ch++) x_in[c][ch] = xbit(tau, c, ch);
      end
      for (int r = 0; r < ROWS; r++)
        for (int j = 0; j < IL; j++) y_in[r][j] = ybit(t - r, r, j);
      // Load next group's matrix in phases 16.. of this group.
      wl_en = (p >= 16) && (p < 16 + ROWS) && (g + 1 < G);
      for (int c = 0; c < COLS; c++)
        wl_in[c] = (g + 1 < G && p >= 16 && p < 16 + ROWS) ? we[g+1][ROWS-1-(p-16)][c] : '0;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        int tau;
        tau = t - r - COLS + 1;   // base time of the bit now on y_out[r]
        if (tau >= 0) begin
          // sideband alignment check
          checks++;
          if (ys_out[r].phase !== PH_BITS'(tau % ACC_BITS)) begin
            failures++;
            if (failures < 5) $display("phase misaligned row %0d t=%0d", r, t);
          end
          for (int j = 0; j < IL; j++) begin
            int tt;
            tt = tau - j * X_BITS;
            if (tt >= 0 && tt / ACC_BITS < G + 2) got[tt / ACC_BITS][j][r][tt % ACC_BITS] = y_out[r][j];
          end
        end
      end
    end
    for (int g = 0; g < G; g++)
      for (int j = 0; j < IL; j++)
        for (int r = 0; r < ROWS; r++) begin
          logic [ACC_BITS-1:0] exp;
          exp = yd[g][j][r];
          for (int c = 0; c < COLS; c++)
            exp += ACC_BITS'($signed({1'b0, xd[g][j][c][we[g][r][c].sel]}) * we[g][r][c].w);
          checks++;
          if (got[g][j][r] !== exp) begin
            failures++;
            if (failures < 10) $display("g=%0d j=%0d r=%0d got %h exp %h", g, j, r, got[g][j][r], exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
