// en_t_encoder: EN-T multiplicand encoder (combinational).
//
// An N-bit signed multiplicand A is recoded into N+1 bits: a sign bit and
// N/2 two-bit digits w_i in {0, 1, 2, -1} (codes 00, 01, 10, 11) with
// |A| = sum_i w_i * 4^i. A multiplier can then form every partial product by
// a shift and an optional negation of B, and never needs 3B.
//
// The magnitude is split into radix-4 digits a_i. The lowest digit is
// passed through unchanged (w_0 = a_0, carry c_1 = a_0[1] & a_0[0]); each
// higher digit has one digit encoder:
//     Encode(w_i) = a_i + c_i                 (2-bit sum, carry out dropped)
//     c_(i+1)     = (a_i[1] & a_i[0]) | (a_i[1] & c_i)
// so N/2 - 1 encoders form a ripple carry chain. The carry out of the top
// digit is always 0 because |A| <= 2^(N-1) keeps the top digit at most 2.
//
// Interface: a (N-bit two's complement) in, enc = {sign, w_(N/2-1), ..., w_0}
// out. Purely combinational; a register stage is added by encoder_bank.
//
// Follows the paper: the digit set, its binary codes, the carry recursion and
// the sign-plus-digits format (78 -> {0, 1, 1, -1, 2}). Own choice: the
// two's-complement negation that turns a negative A into its magnitude,
// which the paper does not describe.
module en_t_encoder #(
  parameter int unsigned N = 8  // multiplicand width, even
) (
  input  logic [N-1:0] a,
  output logic [N:0]   enc
);

  localparam int unsigned D = N / 2;  // number of digits

  logic [N-1:0] mag;
  logic [D:0]   c;  // c[i] is the carry into digit i

  // Sign and magnitude (-2^(N-1) maps to 2^(N-1), which fits unsigned).
  assign mag    = a[N-1] ? (~a + 1'b1) : a;
  assign enc[N] = a[N-1];

  // Lowest digit: no encoder.
  assign c[0]     = 1'b0;
  assign enc[1:0] = mag[1:0];
  assign c[1]     = mag[1] & mag[0];

  // One digit encoder per higher digit: 2-bit sum a_i + c_i and the carry.
  for (genvar i = 1; i < D; i++) begin : g_dig
    assign enc[2*i]   = mag[2*i] ^ c[i];
    assign enc[2*i+1] = mag[2*i+1] ^ (mag[2*i] & c[i]);
    assign c[i+1]     = (mag[2*i+1] & mag[2*i]) | (mag[2*i+1] & c[i]);
  end

  // The carry out of the top digit is unused by construction (see header).
  logic unused_carry;
  assign unused_carry = c[D] | c[0];

endmodule
