// tb_cc_system_full: end-to-end self-checking test of the column-combining systolic
// array system with every parameter at its default (32x32 array, 256 channel banks).
// For each of 2 operations it draws a random layer: map size, group sizes
// of the combined columns, a shift direction per channel, random 8-bit input
// maps, a random packed filter matrix (weight and channel index per cell)
// and a re-quantization shift. It fills the input and weight buffers through
// their write ports, runs the operation, checks the start-to-done cycle
// count, and compares every output-buffer value with a reference computed
// here: shift with zero padding, pointwise product over the packed matrix,
// ReLU, arithmetic right shift and saturation to 0..255.
// It also counts how often each mechanism was exercised (zero padding by the
// shift, channel multiplexing, negative sums zeroed by the ReLU, quantizer
// saturation, a partly filled last group of interleaved streams, a change of
// weights between operations) and counts a failure for any that never occurs.
module tb_cc_system_full;
  import cc_pkg::*;

  localparam int ROWS = 32, COLS = 32, NCH = COLS * ALPHA, DEPTH = 1024, WB_DEPTH = 512;
  localparam int AW  = $clog2(DEPTH);
  localparam int WAW = $clog2(WB_DEPTH);
  localparam int CHW = $clog2(NCH);
  localparam int CLW = $clog2(COLS);
  localparam int RW  = $clog2(ROWS);

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [AW:0] img_h, img_w, npix;
  logic [WAW-1:0] wbase;
  logic [PH_BITS-1:0] qshift;
  logic [SEL_BITS:0] grp_size [COLS];
  shift_dir_t dir [NCH];
  logic ib_wr_en; logic [CHW-1:0] ib_wr_ch; logic [AW-1:0] ib_wr_addr; logic [X_BITS-1:0] ib_wr_data;
  logic wb_wr_en; logic [WAW-1:0] wb_wr_addr; logic [CLW-1:0] wb_wr_col; wentry_t wb_wr_data;
  logic ob_rd_en; logic [RW-1:0] ob_rd_row; logic [AW-1:0] ob_rd_addr; logic [X_BITS-1:0] ob_rd_data;

  cc_system dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference data
  logic [X_BITS-1:0] xmap [NCH][DEPTH];
  wentry_t           wm   [ROWS][COLS];
  int n_pad = 0, n_mux = 0, n_neg = 0, n_sat = 0, n_partial = 0, n_switch = 0;

  function automatic int shifted_val(int m, int h, int w);
    int sh, sw;
    sh = h + int'(dir[m].dy); sw = w + int'(dir[m].dx);
    if (sh < 0 || sw < 0 || sh >= int'(img_h) || sw >= int'(img_w)) return -1;
    return int'(xmap[m][sh * int'(img_w) + sw]);
  endfunction

  task automatic run_op(int op, int hh, int ww, int base);
    int first [COLS+1];
    int nused, ng, cyc, expc;
    img_h = (AW+1)'(hh); img_w = (AW+1)'(ww); npix = (AW+1)'(hh * ww);
    wbase = WAW'(base);
    qshift = PH_BITS'(4 + $urandom % 4);
    // group sizes: 1..ALPHA channels per column, within NCH
    first[0] = 0;
    for (int c = 0; c < COLS; c++) begin
      int s;
      s = 1 + $urandom % ALPHA;
      if (first[c] + s > NCH) s = NCH - first[c];
      grp_size[c] = (SEL_BITS+1)'(s);
      first[c+1] = first[c] + s;
    end
    nused = first[COLS];
    for (int m = 0; m < NCH; m++) begin
      dir[m].dy = 2'($signed(($urandom % 3)) - 1);
      dir[m].dx = 2'($signed(($urandom % 3)) - 1);
    end
    // input maps
    for (int m = 0; m < nused; m++)
      for (int p = 0; p < hh * ww; p++) begin
        xmap[m][p] = X_BITS'($urandom);
        @(negedge clk);
        ib_wr_en = 1; ib_wr_ch = CHW'(m); ib_wr_addr = AW'(p); ib_wr_data = xmap[m][p];
      end
    // packed filter matrix
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        wentry_t e;
        e.w = W_BITS'($urandom);
        if ($urandom % 5 == 0) e.w = 0;
        e.sel = (grp_size[c] == 0) ? '0 : SEL_BITS'($urandom % grp_size[c]);
        if (grp_size[c] == 0) e.w = 0;
        if (e.sel != 0 && e.w != 0) n_mux++;
        wm[r][c] = e;
        @(negedge clk);
        ib_wr_en = 0;
        wb_wr_en = 1; wb_wr_addr = WAW'(base + r); wb_wr_col = CLW'(c); wb_wr_data = e;
      end
    @(negedge clk);
    ib_wr_en = 0; wb_wr_en = 0;
    if (op > 0) n_switch++;
    // run
    ng = (hh * ww + IL - 1) / IL;
    if ((hh * ww) % IL != 0) n_partial++;
    expc = ROWS + X_BITS + ng * ACC_BITS + ROWS + COLS + 80;
    start = 1;
    @(posedge clk);
    #1 start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != expc) begin
      failures++;
      $display("op %0d: start-to-done %0d cycles, expected %0d", op, cyc, expc);
    end
    // compare outputs
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < hh * ww; p++) begin
        longint acc, s;
        int exp;
        acc = 0;
        for (int c = 0; c < COLS; c++) begin
          int m, v;
          m = first[c] + int'(wm[r][c].sel);
          if (grp_size[c] == 0) continue;
          v = shifted_val(m, p / ww, p % ww);
          if (v < 0) begin
            if (wm[r][c].w != 0) n_pad++;
            v = 0;
          end
          acc += longint'(v) * longint'(wm[r][c].w);
        end
        if (acc < 0) begin n_neg++; acc = 0; end
        s = acc >>> qshift;
        if (s > 255) begin n_sat++; s = 255; end
        exp = int'(s);
        @(negedge clk);
        ob_rd_en = 1; ob_rd_row = RW'(r); ob_rd_addr = AW'(p);
        @(negedge clk);
        ob_rd_en = 0;
        checks++;
        if (int'(ob_rd_data) != exp) begin
          failures++;
          if (failures < 10) $display("op %0d row %0d pixel %0d: got %0d expected %0d", op, r, p, ob_rd_data, exp);
        end
      end
  endtask

  initial begin
    start = 0; ib_wr_en = 0; wb_wr_en = 0; ob_rd_en = 0;
    ib_wr_ch = '0; ib_wr_addr = '0; ib_wr_data = '0;
    wb_wr_addr = '0; wb_wr_col = '0; wb_wr_data = '0;
    ob_rd_row = '0; ob_rd_addr = '0;
    img_h = 1; img_w = 1; npix = 1; wbase = '0; qshift = '0;
    for (int c = 0; c < COLS; c++) grp_size[c] = '0;
    for (int m = 0; m < NCH; m++) dir[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_op(0, 6, 7, 0);
    run_op(1, 5, 5, 32);
    // every mechanism must have happened at least once
    $display("mechanisms: zero-pad=%0d multiplex=%0d relu-zero=%0d saturate=%0d partial-group=%0d weight-switch=%0d",
             n_pad, n_mux, n_neg, n_sat, n_partial, n_switch);
    checks++; if (n_pad == 0)     begin failures++; $display("zero padding never exercised"); end
    checks++; if (n_mux == 0)     begin failures++; $display("channel multiplexing never exercised"); end
    checks++; if (n_neg == 0)     begin failures++; $display("ReLU zeroing never exercised"); end
    checks++; if (n_sat == 0)     begin failures++; $display("saturation never exercised"); end
    checks++; if (n_partial == 0) begin failures++; $display("partial group never exercised"); end
    checks++; if (n_switch == 0)  begin failures++; $display("weight switch never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
