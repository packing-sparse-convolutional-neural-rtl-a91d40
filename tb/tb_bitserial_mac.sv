// tb_bitserial_mac: self-checking test of the bit-serial MAC.
// Streams back-to-back 32-cycle words with random unsigned 8-bit inputs,
// random signed weights (including -128, 0, 127) and random 32-bit incoming
// accumulations, and checks y_out = y_in + x*w (mod 2^32) with bit k
// appearing exactly one cycle after y_in bit k.
module tb_bitserial_mac;
  import cc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, x_bit, y_in, y_out;
  logic signed [W_BITS-1:0] w;
  int checks = 0, failures = 0;

  bitserial_mac dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NW = 300;
  logic [X_BITS-1:0]   xs [NW];
  logic signed [W_BITS-1:0] ws [NW];
  logic [ACC_BITS-1:0] ys [NW];
  logic [ACC_BITS-1:0] got;

  initial begin
    for (int i = 0; i < NW; i++) begin
      xs[i] = X_BITS'($urandom);
      ws[i] = W_BITS'($urandom);
      ys[i] = $urandom;
      if (i == 0) begin xs[i] = 8'hFF; ws[i] = -8'sd128; end
      if (i == 1) begin xs[i] = 8'hFF; ws[i] =  8'sd127; end
      if (i == 2) begin ws[i] = 0; end
      if (i == 3) begin xs[i] = 8'hFF; ws[i] = -8'sd1; ys[i] = 32'h8000_0000; end
    end
    start = 0; x_bit = 0; y_in = 0; w = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // Drive words back to back; sample y_out one cycle later.
    fork
      begin
        for (int i = 0; i < NW; i++) begin
          for (int b = 0; b < ACC_BITS; b++) begin
            @(negedge clk);
            start = (b == 0);
            w     = (b == 0) ? ws[i] : W_BITS'($urandom); // weight only matters at start
            x_bit = (b < X_BITS) ? xs[i][b] : 1'b0;
            y_in  = ys[i][b];
          end
        end
        @(negedge clk);
        start = 0; x_bit = 0; y_in = 0;
      end
      begin
        @(negedge clk);  // first bit driven
        for (int i = 0; i < NW; i++) begin
          for (int b = 0; b < ACC_BITS; b++) begin
            @(negedge clk);          // one cycle after the bit was driven
            got[b] = y_out;
          end
          begin
            logic [ACC_BITS-1:0] exp;
            exp = ys[i] + ACC_BITS'($signed({1'b0, xs[i]}) * ws[i]);
            checks++;
            if (got !== exp) begin
              failures++;
              if (failures < 10)
                $display("word %0d: x=%0d w=%0d y=%h got %h exp %h", i, xs[i], ws[i], ys[i], got, exp);
            end
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
