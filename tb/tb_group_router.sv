// tb_group_router: drives random channel bits and random group sizes
// (0..8 per column, including sizes that run past the last channel) into a
// reduced router (32 channels, 6 columns) and checks every lane against the
// running-sum rule: lane k of column c carries channel sum(sizes before c)+k
// when k < size[c] and that channel exists, else 0.
module tb_group_router;
  import cc_pkg::*;
  localparam int NCH = 32, COLS = 6;
  logic [NCH-1:0] ch_bits;
  logic [SEL_BITS:0] grp_size [COLS];
  logic [ALPHA-1:0] lanes [COLS];
  int checks = 0, failures = 0;
  group_router #(.NCH(NCH), .COLS(COLS)) dut (.*);
  initial begin
    #100000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 500; i++) begin
      int first;
      ch_bits = NCH'($urandom);
      for (int c = 0; c < COLS; c++) grp_size[c] = (SEL_BITS+1)'($urandom % (ALPHA + 1));
      #1;
      first = 0;
      for (int c = 0; c < COLS; c++) begin
        for (int k = 0; k < ALPHA; k++) begin
          logic e;
          e = (k < int'(grp_size[c]) && first + k < NCH) ? ch_bits[first + k] : 1'b0;
          checks++;
          if (lanes[c][k] !== e) begin
            failures++;
            if (failures < 5) $display("col %0d lane %0d got %b exp %b", c, k, lanes[c][k], e);
          end
        end
        first += int'(grp_size[c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
