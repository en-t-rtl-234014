// tcu_cube3d: 3D Cube tensor computing unit, NCUBE cubes of CUBE^3 multipliers.
//
// Each cube_core multiplies a CUBE x CUBE activation block by a CUBE x CUBE
// encoded weight block in one cycle. With the default two 8^3 cubes the
// unit has 1024 multipliers, as many as a 32 x 32 array. To take operands
// through the same 32-wide ports as the 2D arrays, the unit works on an
// S x S x S tile in three phases:
//   load    S steps; step k stores activation column X[*][k] and encoded
//           weight row W[k][*] in staging registers;
//   compute (S/CUBE)^3 / NCUBE cycles; in cycle t cube c works on output
//           block ob = (t / KB) * NCUBE + c (row block ob / NB, column
//           block ob % NB) and k-block kb = t % KB, KB = NB = S/CUBE, adding
//           the block product to its CUBE x CUBE accumulator; after the last
//           k-block the block is written to the S x S result registers;
//   read-out S cycles of c_valid with c_row = C[r][*], r = 0 .. S-1.
//
// Interface: as tcu_matrix2d (in_valid with x_vec = activation column k and
// w_row = encoded weight row k; c_valid/c_row). New steps must wait for the
// last output row.
//
// Follows the paper: two 8^3 cubes fed with encoded weights, 1024
// multipliers for the 1024 GOPS point. Own choice: the staging registers,
// the block schedule and the read-out.
module tcu_cube3d #(
  parameter int unsigned S     = 32,
  parameter int unsigned CUBE  = 8,
  parameter int unsigned NCUBE = 2,
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

  localparam int unsigned NB    = S / CUBE;             // blocks per side
  localparam int unsigned KB    = NB;                   // k-blocks
  localparam int unsigned STEPS = NB * NB * KB / NCUBE; // compute cycles
  localparam int unsigned TW    = $clog2(STEPS);

  typedef enum logic [1:0] {LOAD, COMPUTE, DUMP} state_e;
  state_e state;

  logic [$clog2(S)-1:0] cnt;     // load step / read-out row
  logic [TW-1:0]        t;       // compute cycle
  logic [N-1:0]         x_st [S][S];  // [i][k]
  logic [N:0]           w_st [S][S];  // [k][j]
  logic signed [ACC_W-1:0] res [S][S];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= LOAD;
      cnt     <= '0;
      t       <= '0;
      c_valid <= 1'b0;
    end else begin
      c_valid <= 1'b0;
      unique case (state)
        LOAD: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == $clog2(S)'(S - 1)) state <= COMPUTE;
        end
        COMPUTE: begin
          t <= t + 1'b1;
          if (t == TW'(STEPS - 1)) state <= DUMP;
        end
        default: begin  // DUMP
          c_valid <= 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt == $clog2(S)'(S - 1)) state <= LOAD;
        end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == LOAD && in_valid)
      for (int i = 0; i < S; i++) begin
        x_st[i][cnt] <= x_vec[i];
        w_st[cnt][i] <= w_row[i];
      end
    if (state == DUMP)
      for (int j = 0; j < S; j++) c_row[j] <= res[cnt][j];
  end

  // Block schedule: all cubes share the k-block, cube c takes output block
  // (t / KB) * NCUBE + c.
  int unsigned kb;
  int unsigned bi [NCUBE];
  int unsigned bj [NCUBE];
  logic signed [ACC_W-1:0] cacc [NCUBE][CUBE][CUBE];  // per-cube accumulators
  logic signed [ACC_W-1:0] nxt  [NCUBE][CUBE][CUBE];  // accumulator + block product

  always_comb begin
    kb = int'(t) % KB;
    for (int c = 0; c < NCUBE; c++) begin
      bi[c] = ((int'(t) / KB) * NCUBE + c) / NB;
      bj[c] = ((int'(t) / KB) * NCUBE + c) % NB;
    end
  end

  for (genvar c = 0; c < NCUBE; c++) begin : g_cube
    logic [CUBE-1:0][CUBE-1:0][N-1:0]     x_blk;
    logic [CUBE-1:0][CUBE-1:0][N:0]       w_blk;
    logic [CUBE-1:0][CUBE-1:0][ACC_W-1:0] p_blk;

    always_comb begin
      for (int i = 0; i < CUBE; i++)
        for (int k = 0; k < CUBE; k++) begin
          x_blk[i][k] = x_st[bi[c]*CUBE + i][kb*CUBE + k];
          w_blk[k][i] = w_st[kb*CUBE + k][bj[c]*CUBE + i];
        end
      for (int i = 0; i < CUBE; i++)
        for (int j = 0; j < CUBE; j++)
          nxt[c][i][j] = (kb == 0 ? '0 : cacc[c][i][j]) + signed'(p_blk[i][j]);
    end

    cube_core #(.C(CUBE), .N(N), .ACC_W(ACC_W)) u_core (
      .x_blk(x_blk), .w_blk(w_blk), .p_blk(p_blk));
  end

  always_ff @(posedge clk)
    if (state == COMPUTE)
      for (int c = 0; c < NCUBE; c++)
        for (int i = 0; i < CUBE; i++)
          for (int j = 0; j < CUBE; j++) begin
            cacc[c][i][j] <= nxt[c][i][j];
            if (kb == KB - 1) res[bi[c]*CUBE + i][bj[c]*CUBE + j] <= nxt[c][i][j];
          end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> state == LOAD);

endmodule
