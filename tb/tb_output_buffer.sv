// tb_output_buffer: writes random values through all row ports at once
// (different addresses per row) into a reduced output buffer (4 rows x 32),
// then reads every location through the single read port and checks it.
module tb_output_buffer;
  import cc_pkg::*;
  localparam int ROWS = 4, DEPTH = 32, RW = $clog2(ROWS), AW = $clog2(DEPTH);
  logic clk = 0;
  logic wr_en [ROWS]; logic [AW-1:0] wr_addr [ROWS]; logic [X_BITS-1:0] wr_data [ROWS];
  logic rd_en; logic [RW-1:0] rd_row; logic [AW-1:0] rd_addr; logic [X_BITS-1:0] rd_data;
  int checks = 0, failures = 0;
  logic [X_BITS-1:0] ref_mem [ROWS][DEPTH];
  output_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    rd_en = 0; rd_row = 0; rd_addr = 0;
    for (int r = 0; r < ROWS; r++) begin wr_en[r] = 0; wr_addr[r] = 0; wr_data[r] = 0; end
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        int aa;
        aa = (a + 7 * r) % DEPTH;
        ref_mem[r][aa] = X_BITS'($urandom);
        wr_en[r] = 1; wr_addr[r] = AW'(aa); wr_data[r] = ref_mem[r][aa];
      end
    end
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) wr_en[r] = 0;
    for (int r = 0; r < ROWS; r++)
      for (int a = 0; a < DEPTH; a++) begin
        rd_en = 1; rd_row = RW'(r); rd_addr = AW'(a);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (rd_data !== ref_mem[r][a]) begin
          failures++;
          if (failures < 5) $display("row %0d addr %0d got %h exp %h", r, a, rd_data, ref_mem[r][a]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
