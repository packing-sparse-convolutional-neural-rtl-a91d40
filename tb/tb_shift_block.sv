// tb_shift_block: self-checking test of the shift block with its input
// buffer, reduced to 6 channels and 64-word banks. Each channel gets a
// random shift direction in {-1,0,1}^2 and a random map; the test plays the
// controller's slot protocol (prime slot, then one 8-cycle slot per pixel,
// fetch on cycle 1, swap on cycle 7, padding slots past the last pixel) and
// checks every output bit against the shifted, zero-padded map, LSB first.
// It also checks that zero padding actually occurred.
module tb_shift_block;
  import cc_pkg::*;
  localparam int NCH = 6, DEPTH = 64, AW = $clog2(DEPTH), CW = $clog2(NCH);
  logic clk = 0, rst_n = 0;
  shift_dir_t dir [NCH];
  logic [AW:0] img_h, img_w, fetch_h, fetch_w;
  logic fetch, fetch_valid, swap, out_en;
  logic [AW-1:0] fetch_addr;
  logic [XB_BITS-1:0] bit_idx;
  logic rd_en [NCH]; logic [AW-1:0] rd_addr [NCH]; logic [X_BITS-1:0] rd_data [NCH];
  logic [NCH-1:0] x_bits;
  logic wr_en; logic [CW-1:0] wr_ch; logic [AW-1:0] wr_addr; logic [X_BITS-1:0] wr_data;
  int checks = 0, failures = 0, npad = 0;
  logic [X_BITS-1:0] xmap [NCH][DEPTH];

  input_buffer #(.NCH(NCH), .DEPTH(DEPTH)) u_buf (.*);
  shift_block  #(.NCH(NCH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [X_BITS-1:0] ref_px(int m, int p, int hh, int ww, output logic pad);
    int h, w, sh, sw;
    pad = 1'b0;
    if (p >= hh * ww) return '0;
    h = p / ww; w = p % ww;
    sh = h + int'(dir[m].dy); sw = w + int'(dir[m].dx);
    if (sh < 0 || sw < 0 || sh >= hh || sw >= ww) begin pad = 1'b1; return '0; end
    return xmap[m][sh * ww + sw];
  endfunction

  task automatic run(int hh, int ww);
    int np, nslots;
    np = hh * ww; nslots = ((np + 3) / 4) * 4;
    img_h = (AW+1)'(hh); img_w = (AW+1)'(ww);
    for (int m = 0; m < NCH; m++) begin
      dir[m].dy = 2'($signed(($urandom % 3)) - 1);
      dir[m].dx = 2'($signed(($urandom % 3)) - 1);
      for (int a = 0; a < np; a++) begin
        @(negedge clk);
        xmap[m][a] = X_BITS'($urandom);
        wr_en = 1; wr_ch = CW'(m); wr_addr = AW'(a); wr_data = xmap[m][a];
      end
    end
    @(negedge clk); wr_en = 0;
    // slot -1 primes pixel 0; slots 0..nslots-1 output pixels
    for (int s = -1; s < nslots; s++) begin
      for (int b = 0; b < X_BITS; b++) begin
        int f;
        f = s + 1;                      // pixel fetched during this slot
        fetch = (b == 1); fetch_valid = (f < np);
        fetch_h = (AW+1)'(f / ww); fetch_w = (AW+1)'(f % ww); fetch_addr = AW'(f);
        swap = (b == X_BITS - 1);
        bit_idx = XB_BITS'(b);
        out_en = (s >= 0);
        #1;
        for (int m = 0; m < NCH; m++) begin
          logic pad;
          logic [X_BITS-1:0] v;
          logic e;
          v = ref_px(m, s, hh, ww, pad);
          e = (s >= 0) ? v[b] : 1'b0;
          if (s >= 0 && b == 0 && pad) npad++;
          checks++;
          if (x_bits[m] !== e) begin
            failures++;
            if (failures < 8) $display("ch %0d slot %0d bit %0d got %b exp %b", m, s, b, x_bits[m], e);
          end
        end
        @(negedge clk);
      end
    end
    fetch = 0; swap = 0; out_en = 0;
  endtask

  initial begin
    wr_en = 0; wr_ch = 0; wr_addr = 0; wr_data = 0;
    fetch = 0; fetch_valid = 0; swap = 0; out_en = 0; bit_idx = 0;
    fetch_h = 0; fetch_w = 0; fetch_addr = 0; img_h = 1; img_w = 1;
    for (int m = 0; m < NCH; m++) dir[m] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(5, 6);
    run(7, 7);
    run(3, 4);
    checks++;
    if (npad == 0) begin failures++; $display("zero padding never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
