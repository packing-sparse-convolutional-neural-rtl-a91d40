// tb_weight_buffer: writes random weight-load words into every column slot
// of a reduced weight buffer (4 columns x 16 entries), then reads entries
// in random order and checks all columns one cycle after the read.
module tb_weight_buffer;
  import cc_pkg::*;
  localparam int COLS = 4, DEPTH = 16, AW = $clog2(DEPTH), CLW = $clog2(COLS);
  logic clk = 0;
  logic wr_en; logic [AW-1:0] wr_addr; logic [CLW-1:0] wr_col; wentry_t wr_data;
  logic rd_en; logic [AW-1:0] rd_addr; wentry_t rd_data [COLS];
  int checks = 0, failures = 0;
  wentry_t ref_mem [DEPTH][COLS];
  weight_buffer #(.COLS(COLS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; wr_addr = 0; wr_col = 0; wr_data = '0; rd_en = 0; rd_addr = 0;
    for (int a = 0; a < DEPTH; a++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        ref_mem[a][c] = wentry_t'($urandom);
        wr_en = 1; wr_addr = AW'(a); wr_col = CLW'(c); wr_data = ref_mem[a][c];
      end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 100; i++) begin
      logic [AW-1:0] a;
      a = AW'($urandom);
      rd_en = 1; rd_addr = a;
      @(negedge clk);
      rd_en = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (rd_data[c] !== ref_mem[a][c]) begin
          failures++;
          if (failures < 5) $display("entry %0d col %0d got %h exp %h", a, c, rd_data[c], ref_mem[a][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
