// tcu_array1d2d: 1D/2D Array tensor computing unit (multipliers + adder trees).
//
// S planes, one per output column j. Plane j keeps the S encoded weights
// W[0..S-1][j]; each cycle it multiplies them with the S elements of one
// activation row X[i][0..S-1] in S encoder-less multipliers and reduces the
// products in a balanced adder tree, giving C[i][j]. All planes together
// produce one output row per cycle. There are no PEs and no registers
// between the multipliers and the tree; only the tree outputs are
// registered.
//
// Interface: as tcu_systolic_ws. w_valid/w_row writes encoded weight row
// k (k counting 0 .. S-1 and wrapping); x_valid/x_vec is one activation
// row; c_valid/c_row is the matching output row one cycle later.
//
// Follows the paper: multiplier planes feeding adder trees without PE
// pipelining, encoded weights from outside. Own choice: weights written by
// row index, one register stage at the tree output.
module tcu_array1d2d #(
  parameter int unsigned S     = 32,
  parameter int unsigned N     = 8,
  parameter int unsigned ACC_W = 16 + $clog2(S)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        w_valid,
  input  logic [S-1:0][N:0]           w_row,
  input  logic                        x_valid,
  input  logic [S-1:0][N-1:0]         x_vec,
  output logic                        c_valid,
  output logic [S-1:0][ACC_W-1:0]     c_row
);

  logic [$clog2(S)-1:0] wcnt;
  logic [N:0]           wreg [S][S];

  always_ff @(posedge clk) begin
    if (!rst_n) wcnt <= '0;
    else if (w_valid) wcnt <= wcnt + 1'b1;
    if (w_valid)
      for (int j = 0; j < S; j++) wreg[wcnt][j] <= w_row[j];
  end

  for (genvar j = 0; j < S; j++) begin : g_plane
    logic [S-1:0][2*N-1:0]   prod;
    logic signed [ACC_W-1:0] sum;
    for (genvar k = 0; k < S; k++) begin : g_mul
      ent_mult #(.N(N)) u_mult (.enc(wreg[k][j]), .b(x_vec[k]), .p(prod[k]));
    end
    adder_tree #(.NUM(S), .IN_W(2*N), .OUT_W(ACC_W)) u_tree (.in(prod), .sum(sum));
    always_ff @(posedge clk)
      if (x_valid) c_row[j] <= sum;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) c_valid <= 1'b0;
    else        c_valid <= x_valid;
  end

  a_no_reload: assert property (@(posedge clk) disable iff (!rst_n) !(w_valid && x_valid));

endmodule
