// tb_input_buffer: fills every bank of a reduced input buffer (8 channels x
// 32 words) with random data, then reads all banks in parallel at random,
// independent addresses and checks the one-cycle read latency and the data.
module tb_input_buffer;
  import cc_pkg::*;
  localparam int NCH = 8, DEPTH = 32, CW = $clog2(NCH), AW = $clog2(DEPTH);
  logic clk = 0;
  logic wr_en; logic [CW-1:0] wr_ch; logic [AW-1:0] wr_addr; logic [X_BITS-1:0] wr_data;
  logic rd_en [NCH]; logic [AW-1:0] rd_addr [NCH]; logic [X_BITS-1:0] rd_data [NCH];
  int checks = 0, failures = 0;
  logic [X_BITS-1:0] ref_mem [NCH][DEPTH];
  input_buffer #(.NCH(NCH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; wr_ch = 0; wr_addr = 0; wr_data = 0;
    for (int m = 0; m < NCH; m++) begin rd_en[m] = 0; rd_addr[m] = 0; end
    for (int m = 0; m < NCH; m++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        ref_mem[m][a] = X_BITS'($urandom);
        wr_en = 1; wr_ch = CW'(m); wr_addr = AW'(a); wr_data = ref_mem[m][a];
      end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      logic [AW-1:0] a [NCH];
      for (int m = 0; m < NCH; m++) begin a[m] = AW'($urandom); rd_en[m] = 1; rd_addr[m] = a[m]; end
      @(negedge clk);
      for (int m = 0; m < NCH; m++) begin
        rd_en[m] = 0;
        checks++;
        if (rd_data[m] !== ref_mem[m][a[m]]) begin
          failures++;
          if (failures < 5) $display("bank %0d addr %0d got %h exp %h", m, a[m], rd_data[m], ref_mem[m][a[m]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
