// quantizer: re-quantizes a bit-serial 32-bit result to an 8-bit input value.
//
// The paper states only that the ReLU output is re-quantized to 8-bit fixed
// point (a linear fixed-point scheme) before it is stored; the circuit here
// is this design's own, the simplest that does that. The serial word is
// gathered LSB first in a 32-bit shift register; when the word is complete it
// is shifted right arithmetically by `qshift` (the layer's scale, a power of
// two), truncated, and saturated to the unsigned range 0..255. Negative words
// (only possible if the ReLU is bypassed) give 0.
//
// Timing: `start` marks bit 0. q and q_stb appear one cycle after the
// cycle that follows the last bit (ACC_BITS + 1 cycles after start); q_valid
// repeats the word's in_valid flag. Back-to-back words are supported.
module quantizer
  import cc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               in_valid,
  input  logic               in_bit,
  input  logic [PH_BITS-1:0] qshift,
  output logic               q_stb,    // a word has been converted
  output logic               q_valid,  // ... and it carried real data
  output logic [X_BITS-1:0]  q
);

  logic [ACC_BITS-1:0] sr;
  logic [PH_BITS-1:0]  pos;
  logic                busy, vld_in;
  logic                sample;
  logic signed [ACC_BITS-1:0] shifted;

  assign sample  = busy && (pos == '0);
  assign shifted = $signed(sr) >>> qshift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr      <= '0;
      pos     <= '0;
      busy    <= 1'b0;
      vld_in  <= 1'b0;
      q_stb   <= 1'b0;
      q_valid <= 1'b0;
      q       <= '0;
    end else begin
      sr    <= {in_bit, sr[ACC_BITS-1:1]};
      q_stb <= sample;
      if (sample) begin
        q_valid <= vld_in;
        if (shifted < 0)                      q <= '0;
        else if (shifted > (2**X_BITS) - 1)   q <= '1;
        else                                  q <= shifted[X_BITS-1:0];
      end
      if (start) begin
        pos    <= PH_BITS'(1);
        busy   <= 1'b1;
        vld_in <= in_valid;
      end else begin
        pos <= pos + 1'b1;
        if (sample) busy <= 1'b0;
      end
    end
  end

endmodule
