// adder_tree: balanced binary tree that sums NUM signed inputs.
//
// Inputs are sign-extended to OUT_W bits and added pairwise in log2(NUM)
// levels. NUM must be a power of two. Combinational.
module adder_tree #(
  parameter int unsigned NUM   = 32,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 21
) (
  input  logic [NUM-1:0][IN_W-1:0] in,
  output logic signed [OUT_W-1:0]  sum
);

  localparam int unsigned LV = $clog2(NUM);

  // g_lv[l].node[i]: i-th sum of level l (level 0 = the sign-extended inputs).
  for (genvar l = 0; l <= LV; l++) begin : g_lv
    logic signed [OUT_W-1:0] node [NUM >> l];
    for (genvar i = 0; i < (NUM >> l); i++) begin : g_n
      if (l == 0) begin : g_leaf
        assign node[i] = OUT_W'(signed'(in[i]));
      end else begin : g_add
        assign node[i] = g_lv[l-1].node[2*i] + g_lv[l-1].node[2*i+1];
      end
    end
  end
  assign sum = g_lv[LV].node[0];

endmodule
