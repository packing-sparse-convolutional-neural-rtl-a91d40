// relu_serial: bit-serial ReLU.
//
// A 32-bit two's-complement word arrives LSB first, one bit per cycle, with
// `start` high on its bit 0. The bits shift through a 32-stage register array
// until the last (sign) bit has arrived; at that moment the sign is sampled
// ("sample every 32 cycles" in the paper's ReLU figure) and held while the
// word shifts out of the far end of the array, LSB first, over the next 32
// cycles. A two-input multiplexer selected by the held sign outputs either
// the stored stream (sign 0) or a stream of zeros (sign 1), which is the ReLU.
// Words may follow each other back to back; the next word shifts in while
// the previous one shifts out.
//
// Timing: output bit k of a word leaves exactly ACC_BITS cycles after input
// bit k entered; out_start marks output bit 0 and carries the word's
// in_valid flag to out_valid. The shift register, the sampled sign bit and
// the multiplexer follow the paper; the start/valid framing is this design's.
module relu_serial
  import cc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,      // bit 0 of a word is on in_bit
  input  logic in_valid,   // the word starting now carries real data
  input  logic in_bit,
  output logic out_start,  // bit 0 of a word is on out_bit
  output logic out_valid,
  output logic out_bit
);

  logic [ACC_BITS-1:0] sr;
  logic [PH_BITS-1:0]  pos;     // bits received of the word in flight
  logic                busy;    // a word is shifting in
  logic                vld_in;  // valid flag of the word shifting in
  logic                sign_q, vld_out;
  logic                sample;

  // The word is complete (bit 31 in sr[ACC_BITS-1]) when pos has wrapped.
  assign sample    = busy && (pos == '0);
  assign out_start = sample;
  assign out_valid = sample ? vld_in : vld_out;
  // Mux: input 1 selects zero, input 0 the stored stream.
  assign out_bit   = (sample ? sr[ACC_BITS-1] : sign_q) ? 1'b0 : sr[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr      <= '0;
      pos     <= '0;
      busy    <= 1'b0;
      vld_in  <= 1'b0;
      sign_q  <= 1'b1;
      vld_out <= 1'b0;
    end else begin
      sr <= {in_bit, sr[ACC_BITS-1:1]};
      if (sample) begin
        sign_q  <= sr[ACC_BITS-1];
        vld_out <= vld_in;
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
