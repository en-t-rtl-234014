// tb_tcu_systolic_ws: weight-stationary systolic array with S = 32.
//
// Three tiles: S encoded weight rows W[k][*] are written, then S activation
// rows X[i][*] are streamed on consecutive cycles. Tile 1 uses -128
// everywhere for the largest sums; tile 2 reloads new random weights. Every
// output row must equal row i of C = X * W from a reference product, rows
// must leave in order on consecutive cycles, and row i must appear
// 2S-2 clock edges after the edge that takes activation row i.
module tb_tcu_systolic_ws;
  import tb_ent_ref_pkg::*;

  localparam int S = 32;
  localparam int ACC_W = 16 + $clog2(S);
  localparam int LAT = 2 * S - 2;

  logic clk = 1'b0, rst_n = 1'b0, w_valid = 1'b0, x_valid = 1'b0;
  logic [S-1:0][7:0]       x_vec;
  logic [S-1:0][8:0]       w_row;
  logic                    c_valid;
  logic [S-1:0][ACC_W-1:0] c_row;
  int X [S][S];
  int W [S][S];
  int x_edge [S];
  int checks = 0, failures = 0;
  int cycle = 0;

  tcu_systolic_ws #(.S(S)) dut (.clk, .rst_n, .w_valid, .w_row, .x_valid, .x_vec, .c_valid, .c_row);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // Clock edge that took each activation row (rows counted modulo S).
  int xcnt = 0;
  always @(posedge clk)
    if (x_valid) begin
      x_edge[xcnt % S] <= cycle + 1;
      xcnt <= xcnt + 1;
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(int kind);
    int r, c;
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j++) begin
        X[i][j] = (kind == 1) ? -128 : rand_int8();
        W[i][j] = (kind == 1) ? -128 : rand_int8();
      end
    for (int k = 0; k < S; k++) begin
      @(negedge clk);
      w_valid = 1'b1;
      for (int j = 0; j < S; j++) w_row[j] = ref_encode(W[k][j]);
    end
    @(negedge clk);
    w_valid = 1'b0;
    r = 0;
    fork
      for (int i = 0; i < S; i++) begin
        x_valid = 1'b1;
        for (int k = 0; k < S; k++) x_vec[k] = 8'(X[i][k]);
        @(negedge clk);
        x_valid = 1'b0;
      end
      while (r < S) begin
        @(posedge clk);
        #1;
        if (c_valid) begin
          checks++;
          if (cycle - x_edge[r] != LAT) begin
            failures++;
            $display("FAIL row %0d latency %0d expected %0d", r, cycle - x_edge[r], LAT);
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
    join
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
