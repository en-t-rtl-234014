// simd_engine: vector post-processing of TCU output rows.
//
// LANES lanes work on one output row of the array per cycle. Each lane
// takes a signed accumulator value and applies, in order:
//   scalar addition   y = x + cfg.scalar
//   activation        y = max(y, 0) when cfg.relu
//   quantisation      y = saturate_int8(y >>> cfg.shift)
// With cfg.pool set, rows are paired (row 0 with 1, 2 with 3, ...) and only
// the lane-wise maximum of each pair is output (2x1 max pooling), so a tile
// of S rows gives S/2 output rows. start clears the pairing at the
// beginning of a tile.
//
// Interface: in_valid/in_row; out_valid/out_row (INT8 per lane) one cycle
// after the row (after the second row of a pair when pooling). cfg must be
// stable during a tile. Synchronous active-low reset clears out_valid.
//
// Follows the paper: 32 lanes doing scalar addition, activation,
// quantisation and pooling after the TCU. Own choice: the lanes compute in
// integer fixed point on the accumulator values, not in TF32 floating point;
// the order of the steps; ReLU as the activation; 2x1 max pooling.
module simd_engine #(
  parameter int unsigned LANES = 32,
  parameter int unsigned IN_W  = 21
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  ent_pkg::simd_cfg_t          cfg,
  input  logic                        in_valid,
  input  logic [LANES-1:0][IN_W-1:0]  in_row,
  output logic                        out_valid,
  output logic [LANES-1:0][7:0]       out_row
);

  localparam int unsigned W = (IN_W > 16 ? IN_W : 16) + 1;

  logic [LANES-1:0][7:0] q;       // quantised lanes of this row
  logic [LANES-1:0][7:0] held;    // first row of a pooling pair
  logic                  odd;     // next row is the second of a pair

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [W-1:0] y;
      y = W'(signed'(in_row[l])) + W'(cfg.scalar);
      if (cfg.relu && y < 0) y = '0;
      y = y >>> cfg.shift;
      if (y > 127)       q[l] = 8'sd127;
      else if (y < -128) q[l] = 8'h80;
      else               q[l] = y[7:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      odd       <= 1'b0;
    end else begin
      out_valid <= in_valid && (!cfg.pool || odd);
      if (start)         odd <= 1'b0;
      else if (in_valid) odd <= cfg.pool ? !odd : 1'b0;
    end
    if (in_valid) begin
      held <= q;
      for (int l = 0; l < LANES; l++)
        if (cfg.pool && signed'(held[l]) > signed'(q[l])) out_row[l] <= held[l];
        else                                              out_row[l] <= q[l];
    end
  end

endmodule
