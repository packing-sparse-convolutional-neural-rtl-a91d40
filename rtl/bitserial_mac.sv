// bitserial_mac: bit-serial multiplier-accumulator.
//
// Computes y_out = y_in + x * w over one ACC_BITS-cycle word, with x an
// unsigned X_BITS input, w a two's-complement W_BITS weight and y a
// two's-complement ACC_BITS accumulation. All serial streams are LSB first.
//
// Structure (following the figure of the bit-serial MAC):
//  * Multiplier: W_BITS AND gates, each ANDing the broadcast input bit with
//    one bit of |w|, feed a row of full adders. Every adder keeps its carry in
//    a register fed back to itself, and passes its sum through a register to
//    the carry-in of its right-hand neighbour; the leftmost adder has carry-in
//    0. The rightmost adder emits the product |w|*x one bit per cycle.
//  * Negation: a serial incrementer adds the inverted product bit to a carry
//    register that starts each word at 1 (two's-complement negate).
//  * A multiplexer ("Control1") picks the plain or negated product by the
//    sign of w.
//  * Accumulation: a serial full adder with a carry register adds the
//    selected product to y_in; its sum is registered onto y_out.
//
// Timing: `start` marks the cycle carrying bit 0 of the word (x bit 0 and
// y_in bit 0). The weight is captured on that cycle and held for the word, so
// a new weight can be presented without disturbing a word in flight. The
// caller feeds x bits 0..X_BITS-1 in the first X_BITS cycles and 0 after them;
// y_out bit k appears one cycle after y_in bit k. At `start` all carry and
// partial-sum registers are taken as cleared (the "Reset" of the figure),
// the negation carry as 1.
//
// Own choices: the figure draws a register on the non-negated product path;
// here both product paths are combinational so they stay aligned, and the
// only pipeline register is the one on y_out. x is unsigned (after ReLU and
// quantization every layer input is non-negative). The figure's "Enable" is
// not implemented: the array never stalls.
module bitserial_mac
  import cc_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,   // bit 0 of a new word on this cycle
  input  logic signed [W_BITS-1:0] w,       // weight, captured at start
  input  logic                     x_bit,   // input data bit (0 outside its slot)
  input  logic                     y_in,    // incoming accumulation bit
  output logic                     y_out    // outgoing accumulation bit (1-cycle latency)
);

  logic [W_BITS-1:0] mag_q, mag;       // |w| for the word in flight
  logic              neg_q, neg;       // sign of w for the word in flight
  logic [W_BITS-1:0] sum_q, carry_q;   // multiplier sum and carry registers
  logic [W_BITS-1:0] sum_d, carry_d;
  logic [W_BITS-1:0] sum_e, carry_e;   // effective (cleared at start)
  logic              negc_q, negc_e, negc_d;
  logic              accc_q, accc_e, accc_d;
  logic              prod, nprod, sel, acc_s;

  // |w| fits W_BITS bits, including |-128| = 128.
  always_comb begin
    mag = mag_q;
    neg = neg_q;
    if (start) begin
      neg = w[W_BITS-1];
      mag = w[W_BITS-1] ? W_BITS'(-w) : W_BITS'(w);
    end
    sum_e   = start ? '0 : sum_q;
    carry_e = start ? '0 : carry_q;
    negc_e  = start ? 1'b1 : negc_q;
    accc_e  = start ? 1'b0 : accc_q;
  end

  // Serial-parallel multiplier row.
  always_comb begin
    for (int k = 0; k < W_BITS; k++) begin
      logic a, ci;
      a  = x_bit & mag[k];
      ci = (k == W_BITS-1) ? 1'b0 : sum_e[k+1];
      {carry_d[k], sum_d[k]} = {1'b0, a} + {1'b0, ci} + {1'b0, carry_e[k]};
    end
    prod = sum_d[0];
    // Serial two's-complement negation: ~p + 1 carried through the word.
    {negc_d, nprod} = {1'b0, ~prod} + {1'b0, negc_e};
    sel = neg ? nprod : prod;
    {accc_d, acc_s} = {1'b0, sel} + {1'b0, y_in} + {1'b0, accc_e};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mag_q   <= '0;
      neg_q   <= 1'b0;
      sum_q   <= '0;
      carry_q <= '0;
      negc_q  <= 1'b1;
      accc_q  <= 1'b0;
      y_out   <= 1'b0;
    end else begin
      mag_q   <= mag;
      neg_q   <= neg;
      sum_q   <= sum_d;
      carry_q <= carry_d;
      negc_q  <= negc_d;
      accc_q  <= accc_d;
      y_out   <= acc_s;
    end
  end

endmodule
