// ent_pe: processing element of the output-stationary EN-T arrays.
//
// Holds one output element. Each cycle with en set it adds the product of
// an encoded multiplicand (weight) and a raw INT8 multiplier (activation)
// to its accumulator; clr loads zero first (clr and en together start a
// new sum with this product). The accumulator is ACC_W = 16 + log2(S) bits,
// enough for S products of two INT8 numbers.
//
// Interface: enc (N+1) and b (N) in, acc (ACC_W signed) out, one cycle from
// en to the updated acc. Synchronous active-low reset clears acc.
//
// Follows the paper: PE = encoder-less multiplier plus accumulator of
// 16 + log2(S) bits. Own choice: the clr/en controls and the reset.
module ent_pe #(
  parameter int unsigned N     = 8,
  parameter int unsigned ACC_W = 21
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    en,
  input  logic [N:0]              enc,
  input  logic signed [N-1:0]     b,
  output logic signed [ACC_W-1:0] acc
);

  logic signed [2*N-1:0] prod;

  ent_mult #(.N(N)) u_mult (.enc(enc), .b(b), .p(prod));

  always_ff @(posedge clk) begin
    if (!rst_n)       acc <= '0;
    else if (en)      acc <= (clr ? '0 : acc) + ACC_W'(prod);
    else if (clr)     acc <= '0;
  end

endmodule
