// tcu_matrix2d: 2D Matrix tensor computing unit with EN-T encoded weights.
//
// S x S processing elements (ent_pe). In each step k the activation column
// X[0..S-1][k] is broadcast along the rows and the encoded weight row
// W[k][0..S-1] down the columns; PE (i, j) adds X[i][k] * W[k][j] to its
// accumulator, so after S steps it holds C[i][j] of C = X * W. Because the
// weights come pre-encoded, the PEs hold no encoder.
//
// Interface: a step is in_valid with x_vec (activation column, element i for
// row i) and w_row (encoded weight row, element j for column j). The first
// step of a tile clears the accumulators. One cycle after the S-th step the
// unit outputs C row by row: c_valid for S cycles with c_row = C[r][*],
// r = 0 .. S-1. New steps must not arrive before the last row has left.
//
// Follows the paper: broadcast of rows and columns to a grid of
// multiply-accumulate PEs, encoders outside the array, accumulator width.
// Own choice: one k per cycle, tile depth S and the row-by-row read-out.
module tcu_matrix2d #(
  parameter int unsigned S     = 32,
  parameter int unsigned N     = 8,
  parameter int unsigned ACC_W = 16 + $clog2(S)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [S-1:0][N-1:0]         x_vec,
  input  logic [S-1:0][N:0]           w_row,
  output logic                        c_valid,
  output logic [S-1:0][ACC_W-1:0]     c_row
);

  logic [$clog2(S)-1:0] kcnt;
  logic [$clog2(S)-1:0] rcnt;
  logic                 dumping;
  logic signed [ACC_W-1:0] acc [S][S];

  for (genvar i = 0; i < S; i++) begin : g_row
    for (genvar j = 0; j < S; j++) begin : g_col
      ent_pe #(.N(N), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .clr (in_valid && kcnt == '0),
        .en  (in_valid),
        .enc (w_row[j]),
        .b   (x_vec[i]),
        .acc (acc[i][j])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      kcnt    <= '0;
      rcnt    <= '0;
      dumping <= 1'b0;
      c_valid <= 1'b0;
    end else begin
      c_valid <= dumping;
      if (in_valid) begin
        kcnt <= kcnt + 1'b1;
        if (kcnt == $clog2(S)'(S - 1)) dumping <= 1'b1;
      end
      if (dumping) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == $clog2(S)'(S - 1)) dumping <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk)
    if (dumping)
      for (int j = 0; j < S; j++) c_row[j] <= acc[rcnt][j];

  // A tile's steps and its read-out never overlap.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && dumping));

endmodule
