// tb_cc_controller: checks the controller's sequence for one operation at a
// reduced size (ROWS=4, COLS=3): exactly ROWS weight-buffer reads at
// wbase+ROWS-1 down to wbase, each followed one cycle later by a load-chain
// shift; one prime slot and one fetch per streamed slot with the row-major
// pixel coordinates; a sideband whose phase counts 0..31, with commit only
// on the first streamed cycle and valid only for real pixels; and `done`
// exactly ROWS + 8 + 32*ceil(npix/4) + ROWS + COLS + 80 cycles after start.
module tb_cc_controller;
  import cc_pkg::*;
  localparam int ROWS = 4, COLS = 3, DEPTH = 64, WB_DEPTH = 16;
  localparam int AW = $clog2(DEPTH), WAW = $clog2(WB_DEPTH);
  logic clk = 0, rst_n = 0;
  logic start, busy, done, op_start, wb_rd_en, wl_en, fetch, fetch_valid, swap, out_en;
  logic [AW:0] npix, img_w, fetch_h, fetch_w;
  logic [WAW-1:0] wbase, wb_rd_addr;
  logic [AW-1:0] fetch_addr;
  logic [XB_BITS-1:0] bit_idx;
  xside_t xs;
  int checks = 0, failures = 0;

  cc_controller #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .WB_DEPTH(WB_DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic run(int hh, int ww, int base);
    int np, ng, cyc, nrd, nwl, nfetch, ncommit, nstream, expc, prev_rd;
    np = hh * ww; ng = (np + IL - 1) / IL;
    npix = (AW+1)'(np); img_w = (AW+1)'(ww); wbase = WAW'(base);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 0; nrd = 0; nwl = 0; nfetch = 0; ncommit = 0; nstream = 0; prev_rd = 0;
    expc = ROWS + X_BITS + ng * ACC_BITS + ROWS + COLS + 80;
    while (!done && cyc < 100000) begin
      if (wb_rd_en) begin
        check(wb_rd_addr == WAW'(base + ROWS - 1 - nrd), "weight read address");
        nrd++;
      end
      check(wl_en == prev_rd, "load shift one cycle after read");
      prev_rd = wb_rd_en;
      if (wl_en) nwl++;
      if (fetch) begin
        check(fetch_h == (AW+1)'(nfetch / ww) && fetch_w == (AW+1)'(nfetch % ww) &&
              fetch_addr == AW'(nfetch), "fetch coordinate");
        check(fetch_valid == (nfetch < np), "fetch valid");
        nfetch++;
      end
      if (xs.run) begin
        check(xs.phase == PH_BITS'(nstream % ACC_BITS), "phase count");
        check(xs.valid == ((nstream / X_BITS) < np), "slot valid");
        check(xs.commit == (nstream == 0), "commit only at first cycle");
        if (xs.commit) ncommit++;
        nstream++;
      end
      @(negedge clk);
      cyc++;
    end
    check(nrd == ROWS && nwl == ROWS, "ROWS weight rows loaded");
    check(nfetch == 1 + ng * IL, "one fetch per slot plus prime");
    check(ncommit == 1, "exactly one commit");
    check(nstream == ng * ACC_BITS, "streamed cycles");
    check(cyc == expc, $sformatf("start-to-done %0d expected %0d", cyc, expc));
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    start = 0; npix = 1; img_w = 1; wbase = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(5, 7, 3);
    run(4, 4, 8);
    run(1, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
