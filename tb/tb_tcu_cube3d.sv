// tb_tcu_cube3d: 3D Cube TCU (two 8^3 cubes) on a 32 x 32 x 32 tile.
//
// Three S x S x S tiles (random, all -128 for the largest sums, random
// again) are streamed as steps k = 0 .. S-1 of activation column X[*][k]
// and encoded weight row W[k][*]. The S output rows must equal C = X * W
// from a reference product, come out on S consecutive cycles, and the first
// must appear (S/8)^3/2 + 1 cycles (the block schedule of the two cubes) after the last step.
module tb_tcu_cube3d;
  import tb_ent_ref_pkg::*;

  localparam int S = 32;
  localparam int ACC_W = 16 + $clog2(S);
  localparam int LAT = (S / 8) * (S / 8) * (S / 8) / 2 + 1;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [S-1:0][7:0]       x_vec;
  logic [S-1:0][8:0]       w_row;
  logic                    c_valid;
  logic [S-1:0][ACC_W-1:0] c_row;
  int X [S][S];
  int W [S][S];
  int checks = 0, failures = 0;
  int cycle = 0;

  tcu_cube3d #(.S(S)) dut (.clk, .rst_n, .in_valid, .x_vec, .w_row, .c_valid, .c_row);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(int kind);
    int last_step, r, first_row;
    int c;
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j++) begin
        X[i][j] = (kind == 1) ? -128 : rand_int8();
        W[i][j] = (kind == 1) ? -128 : rand_int8();
      end
    for (int k = 0; k < S; k++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int i = 0; i < S; i++) x_vec[i] = 8'(X[i][k]);
      for (int j = 0; j < S; j++) w_row[j] = ref_encode(W[k][j]);
    end
    @(negedge clk);
    in_valid = 1'b0;
    last_step = cycle;  // clock edge that took the last step
    r = 0;
    first_row = -1;
    while (r < S) begin
      @(posedge clk);
      #1;
      if (c_valid) begin
        if (first_row < 0) first_row = cycle;
        checks++;
        if (cycle != first_row + r) begin
          failures++;
          $display("FAIL row %0d not consecutive", r);
        end
        for (int j = 0; j < S; j++) begin
          c = 0;
          for (int k = 0; k < S; k++) c += X[r][k] * W[k][j];
          checks++;
          if (int'(signed'(c_row[j])) != c) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d C[%0d][%0d]=%0d exp %0d", kind, r, j, signed'(c_row[j]), c);
          end
        end
        r++;
      end
    end
    checks++;
    if (first_row - last_step != LAT) begin
      failures++;
      $display("FAIL latency %0d expected %0d", first_row - last_step, LAT);
    end
  endtask

  initial begin
    x_vec = '0; w_row = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_tile(0);
    run_tile(1);
    repeat (3) @(negedge clk);
    run_tile(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
