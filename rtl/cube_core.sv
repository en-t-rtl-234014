// cube_core: one C x C x C multiplier cube with reduction along k.
//
// For an activation block X (C x C) and an encoded weight block W (C x C)
// it gives the block product P = X * W: output (i, j) is the adder-tree sum
// over k of X[i][k] * W[k][j], taken by C encoder-less multipliers. C^3
// multipliers in all. Combinational; tcu_cube3d holds the registers.
module cube_core #(
  parameter int unsigned C     = 8,
  parameter int unsigned N     = 8,
  parameter int unsigned ACC_W = 21
) (
  input  logic [C-1:0][C-1:0][N-1:0] x_blk,  // [i][k]
  input  logic [C-1:0][C-1:0][N:0]   w_blk,  // [k][j]
  output logic [C-1:0][C-1:0][ACC_W-1:0] p_blk  // [i][j]
);

  for (genvar i = 0; i < C; i++) begin : g_i
    for (genvar j = 0; j < C; j++) begin : g_j
      logic [C-1:0][2*N-1:0] prod;
      for (genvar k = 0; k < C; k++) begin : g_k
        ent_mult #(.N(N)) u_mult (.enc(w_blk[k][j]), .b(x_blk[i][k]), .p(prod[k]));
      end
      adder_tree #(.NUM(C), .IN_W(2*N), .OUT_W(ACC_W)) u_tree (.in(prod), .sum(p_blk[i][j]));
    end
  end

endmodule
