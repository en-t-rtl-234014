// tcu_systolic_os: output-stationary systolic array with EN-T encoded weights.
//
// S x S ent_pe cells. Activations enter at the left edge and move one cell
// right per cycle; encoded weights enter at the top edge and move one cell
// down per cycle. Row i's activation is delayed by i cycles and column j's
// weight by j cycles at the edge, so X[i][k] and W[k][j] meet in PE (i, j)
// at cycle k + i + j and each PE accumulates its own C[i][j]. The 9-bit
// encoded weight, not the 8-bit raw one, is what moves between the cells;
// no cell has an encoder.
//
// A tag {valid, first, last} travels with the activations: first clears
// the accumulator, and when last leaves the bottom-right cell the tile is
// complete.
//
// Interface: as tcu_matrix2d. A step is in_valid with x_vec (activation
// column k) and w_row (encoded weight row k). The wavefront needs 2S-2
// cycles to cross the array; the first row of C is on c_row / c_valid 2S
// clock edges after the edge that takes the last step, the other rows on
// the S-1 cycles after it. Steps of the next tile must wait for the last
// row.
//
// Follows the paper: output-stationary systolic dataflow, operands passed
// between neighbouring PEs, encoders outside the array. Own choice: the
// edge skew registers, the tag and the read-out.
module tcu_systolic_os #(
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

  typedef struct packed {
    logic valid;
    logic first;
    logic last;
  } tag_t;

  logic [$clog2(S)-1:0] kcnt;
  logic [$clog2(S)-1:0] rcnt;
  logic                 dumping;
  tag_t                 tag_in;

  // Edge inputs after the skew, and the cell-to-cell registers.
  logic [N-1:0] x_edge [S];
  tag_t         t_edge [S];
  logic [N:0]   w_edge [S];
  logic [N-1:0] x_q [S][S];   // activation leaving PE (i, j) to the right
  tag_t         t_q [S][S];
  logic [N:0]   w_q [S][S];   // weight leaving PE (i, j) downwards
  logic signed [ACC_W-1:0] acc [S][S];

  assign tag_in = '{valid: in_valid, first: in_valid && kcnt == '0,
                    last: in_valid && kcnt == $clog2(S)'(S - 1)};

  // Skew: row i / column i delayed by i cycles.
  for (genvar i = 0; i < S; i++) begin : g_skew
    if (i == 0) begin : g_d0
      assign x_edge[0] = x_vec[0];
      assign t_edge[0] = tag_in;
      assign w_edge[0] = w_row[0];
    end else begin : g_dn
      logic [N-1:0] xs [i];
      tag_t         ts [i];
      logic [N:0]   ws [i];
      always_ff @(posedge clk) begin
        xs[0] <= x_vec[i];
        ts[0] <= rst_n ? tag_in : '0;
        ws[0] <= w_row[i];
        for (int d = 1; d < i; d++) begin
          xs[d] <= xs[d-1];
          ts[d] <= rst_n ? ts[d-1] : '0;
          ws[d] <= ws[d-1];
        end
      end
      assign x_edge[i] = xs[i-1];
      assign t_edge[i] = ts[i-1];
      assign w_edge[i] = ws[i-1];
    end
  end

  for (genvar i = 0; i < S; i++) begin : g_row
    for (genvar j = 0; j < S; j++) begin : g_col
      logic [N-1:0] x_in;
      tag_t         t_in;
      logic [N:0]   w_in;
      if (j == 0) begin : g_l
        assign x_in = x_edge[i];
        assign t_in = t_edge[i];
      end else begin : g_i
        assign x_in = x_q[i][j-1];
        assign t_in = t_q[i][j-1];
      end
      if (i == 0) begin : g_t
        assign w_in = w_edge[j];
      end else begin : g_u
        assign w_in = w_q[i-1][j];
      end

      ent_pe #(.N(N), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .clr (t_in.first),
        .en  (t_in.valid),
        .enc (w_in),
        .b   (x_in),
        .acc (acc[i][j])
      );

      always_ff @(posedge clk) begin
        x_q[i][j] <= x_in;
        w_q[i][j] <= w_in;
        t_q[i][j] <= rst_n ? t_in : '0;
      end
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
      if (in_valid) kcnt <= kcnt + 1'b1;
      // The bottom-right cell has taken the last step: C is complete.
      if (t_q[S-1][S-1].last) dumping <= 1'b1;
      if (dumping) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == $clog2(S)'(S - 1)) dumping <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk)
    if (dumping)
      for (int j = 0; j < S; j++) c_row[j] <= acc[rcnt][j];

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && dumping));

endmodule
