// tcu_systolic_ws: weight-stationary systolic array with EN-T encoded weights.
//
// S x S cells; cell (k, j) keeps the encoded weight W[k][j]. An activation
// row X[i][0..S-1] enters at the left edge, element k into array row k
// after a skew of k cycles, and moves one cell right per cycle. Partial
// sums move one cell down per cycle: cell (k, j) adds X[i][k] * W[k][j] to
// the sum from above. Cell (k, j) sees row i k + j edges after the edge that
// takes it, so column j's sum C[i][j] leaves the bottom cell S-1+j edges
// later; a de-skew of S-1-j cycles lines the columns up. Each activation
// row gives its output row 2S-2 clock edges after the edge that takes it,
// and a new row can enter every cycle.
//
// Interface: w_valid/w_row writes encoded weight row k into array row k,
// k counting 0 .. S-1 and wrapping. x_valid/x_vec is one activation row
// (element k for array row k). c_valid/c_row gives C[i][*] in input order.
// Weights must not change while rows are in flight.
//
// Follows the paper: weight-stationary dataflow with encoded weights held
// in the PEs, operands and partial sums passed between neighbours. Own
// choice: weights written by row index instead of shifted in, the skew and
// de-skew registers, the full 16 + log2(S)-bit partial-sum path.
module tcu_systolic_ws #(
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

  logic [$clog2(S)-1:0]    wcnt;
  logic [N:0]              wreg [S][S];
  logic [N-1:0]            x_edge [S];
  logic                    v_edge [S];
  logic [N-1:0]            x_q [S][S];
  logic                    v_q [S][S];
  logic signed [ACC_W-1:0] ps_q [S][S];

  always_ff @(posedge clk) begin
    if (!rst_n) wcnt <= '0;
    else if (w_valid) wcnt <= wcnt + 1'b1;
    if (w_valid)
      for (int j = 0; j < S; j++) wreg[wcnt][j] <= w_row[j];
  end

  // Input skew: element k delayed by k cycles.
  for (genvar k = 0; k < S; k++) begin : g_skew
    if (k == 0) begin : g_d0
      assign x_edge[0] = x_vec[0];
      assign v_edge[0] = x_valid;
    end else begin : g_dn
      logic [N-1:0] xs [k];
      logic         vs [k];
      always_ff @(posedge clk) begin
        xs[0] <= x_vec[k];
        vs[0] <= rst_n && x_valid;
        for (int d = 1; d < k; d++) begin
          xs[d] <= xs[d-1];
          vs[d] <= rst_n && vs[d-1];
        end
      end
      assign x_edge[k] = xs[k-1];
      assign v_edge[k] = vs[k-1];
    end
  end

  for (genvar k = 0; k < S; k++) begin : g_row
    for (genvar j = 0; j < S; j++) begin : g_col
      logic [N-1:0]            x_in;
      logic                    v_in;
      logic signed [ACC_W-1:0] ps_in;
      logic signed [2*N-1:0]   prod;
      if (j == 0) begin : g_l
        assign x_in = x_edge[k];
        assign v_in = v_edge[k];
      end else begin : g_i
        assign x_in = x_q[k][j-1];
        assign v_in = v_q[k][j-1];
      end
      if (k == 0) begin : g_t
        assign ps_in = '0;
      end else begin : g_u
        assign ps_in = ps_q[k-1][j];
      end

      ent_mult #(.N(N)) u_mult (.enc(wreg[k][j]), .b(x_in), .p(prod));

      always_ff @(posedge clk) begin
        x_q[k][j]  <= x_in;
        v_q[k][j]  <= rst_n && v_in;
        ps_q[k][j] <= ps_in + ACC_W'(prod);
      end
    end
  end

  // Output de-skew: column j delayed by S-1-j cycles.
  for (genvar j = 0; j < S; j++) begin : g_deskew
    if (j == S - 1) begin : g_d0
      assign c_row[j] = ps_q[S-1][j];
    end else begin : g_dn
      logic [ACC_W-1:0] ds [S-1-j];
      always_ff @(posedge clk) begin
        ds[0] <= ps_q[S-1][j];
        for (int d = 1; d < S - 1 - j; d++) ds[d] <= ds[d-1];
      end
      assign c_row[j] = ds[S-2-j];
    end
  end
  assign c_valid = v_q[S-1][S-1];

  a_no_reload: assert property (@(posedge clk) disable iff (!rst_n) !(w_valid && x_valid));

endmodule
