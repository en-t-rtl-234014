// ent_mult: encoder-less multiplier of an EN-T processing element.
//
// The multiplicand arrives already encoded by en_t_encoder as
// {sign, w_(N/2-1), ..., w_0}, each digit code meaning 0, +1, +2 or -1. The
// multiplier B is a plain N-bit two's-complement number. When the sign bit
// is set, -B is used in place of B. Digit i then selects 0, B, 2B or -B,
// shifted left by 2i, so the N/2 partial-product rows come from shifts and
// negations only, the way a Booth multiplier selects its rows. The rows are
// added to give the 2N-bit signed product A*B.
//
// Interface: enc (N+1 bits) and b (N bits) in, p (2N bits signed) out.
// Purely combinational; the PE around it holds the registers.
//
// Follows the paper: the digit meaning, the sign handling by negating B,
// and the removal of the encoder from the multiplier. Own choice: the
// compressor tree and final adder are written as one sum and left to
// synthesis to build.
module ent_mult #(
  parameter int unsigned N = 8
) (
  input  logic [N:0]          enc,
  input  logic signed [N-1:0] b,
  output logic signed [2*N-1:0] p
);
  import ent_pkg::*;

  localparam int unsigned D  = N / 2;
  localparam int unsigned W2 = 2 * N;

  logic signed [2*N-1:0] bs;           // B with the multiplicand's sign applied
  logic signed [2*N-1:0] pp [D];       // partial-product rows, already shifted

  always_comb begin
    bs = W2'(b);                       // sign extension
    if (enc[N]) bs = -bs;
    p  = '0;
    for (int unsigned i = 0; i < D; i++) begin
      unique case (digit_e'(enc[2*i +: 2]))
        DIG_ZERO: pp[i] = '0;
        DIG_ONE:  pp[i] = bs <<< (2 * i);
        DIG_TWO:  pp[i] = bs <<< (2 * i + 1);
        default:  pp[i] = -(bs <<< (2 * i));  // DIG_MONE
      endcase
      p = p + pp[i];
    end
  end

endmodule
