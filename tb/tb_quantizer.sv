// tb_quantizer: self-checking test of the re-quantizer.
// Sends back-to-back random words (small, large, negative) with random
// shift amounts and checks q = clamp(word >>> qshift, 0, 255), the strobe
// position (ACC_BITS + 1 cycles after start) and the valid flag.
module tb_quantizer;
  import cc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_bit, q_stb, q_valid;
  logic [PH_BITS-1:0] qshift;
  logic [X_BITS-1:0] q;
  int checks = 0, failures = 0;

  quantizer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NW = 300;
  logic [ACC_BITS-1:0] wd [NW];
  logic [PH_BITS-1:0]  sh [NW];
  logic                wv [NW];
  int                  ws [NW];
  int cyc = 0, nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (q_stb) begin
        logic signed [ACC_BITS-1:0] s;
        logic [X_BITS-1:0] exp;
        s = $signed(wd[nout]) >>> sh[nout];
        exp = (s < 0) ? 8'd0 : (s > 255) ? 8'd255 : s[7:0];
        checks++;
        if (q !== exp || q_valid !== wv[nout] || cyc != ws[nout] + ACC_BITS + 1) begin
          failures++;
          if (failures < 10) $display("word %0d %h>>%0d got %0d exp %0d cyc %0d ws %0d", nout, wd[nout], sh[nout], q, exp, cyc, ws[nout]);
        end
        nout++;
      end
    end
  end

  initial begin
    for (int i = 0; i < NW; i++) begin
      case (i % 4)
        0: wd[i] = $urandom;
        1: wd[i] = $urandom % 1024;
        2: wd[i] = $urandom % 65536;
        default: wd[i] = -($urandom % 1000);
      endcase
      sh[i] = PH_BITS'($urandom % 12);
      wv[i] = 1'($urandom);
    end
    start = 0; in_valid = 0; in_bit = 0; qshift = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NW; i++) begin
      for (int b = 0; b < ACC_BITS; b++) begin
        start = (b == 0); in_valid = wv[i]; in_bit = wd[i][b];
        if (b == 0) ws[i] = cyc;
        // the shift applies when the word completes (first cycle of the next word)
        if (b == 0 && i > 0) qshift = sh[i-1];
        @(negedge clk);
      end
    end
    start = 0; qshift = sh[NW-1];
    repeat (40) @(negedge clk);
    checks++;
    if (nout != NW) begin failures++; $display("only %0d words out", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
