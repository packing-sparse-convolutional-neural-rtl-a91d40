// tb_relu_serial: self-checking test of the bit-serial ReLU.
// Sends back-to-back random 32-bit words (and some with gaps), including
// 0, -1, the most negative and most positive values, and checks that each
// output word equals max(word, 0), starts exactly 32 cycles after its input
// word and carries the word's valid flag.
module tb_relu_serial;
  import cc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_bit, out_start, out_valid, out_bit;
  int checks = 0, failures = 0;

  relu_serial dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NW = 200;
  logic [ACC_BITS-1:0] wd [NW];
  logic                wv [NW];
  int                  ws [NW];    // start cycle of each word
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // Output checker: on out_start, collect 32 bits and compare.
  int nout = 0;
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (out_start) begin
        logic [ACC_BITS-1:0] got, exp;
        int c0;
        logic v;
        c0 = cyc; v = out_valid;
        for (int b = 0; b < ACC_BITS; b++) begin
          got[b] = out_bit;
          if (b < ACC_BITS-1) @(negedge clk);
        end
        exp = wd[nout][ACC_BITS-1] ? '0 : wd[nout];
        checks++;
        if (got !== exp || v !== wv[nout] || c0 != ws[nout] + ACC_BITS) begin
          failures++;
          if (failures < 10) $display("word %0d got %h exp %h v=%b c0=%0d ws=%0d", nout, got, exp, v, c0, ws[nout]);
        end
        nout++;
      end
    end
  end

  initial begin
    for (int i = 0; i < NW; i++) begin
      wd[i] = $urandom; wv[i] = 1'($urandom);
    end
    wd[0] = 0; wd[1] = '1; wd[2] = 32'h8000_0000; wd[3] = 32'h7FFF_FFFF;
    start = 0; in_valid = 0; in_bit = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NW; i++) begin
      if (i % 17 == 5) repeat (i % 7 + 1) begin start = 0; in_bit = 1'($urandom); @(negedge clk); end
      for (int b = 0; b < ACC_BITS; b++) begin
        start = (b == 0); in_valid = wv[i]; in_bit = wd[i][b];
        if (b == 0) ws[i] = cyc;
        @(negedge clk);
      end
    end
    start = 0;
    repeat (80) @(negedge clk);
    checks++;
    if (nout != NW) begin failures++; $display("only %0d words out", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
