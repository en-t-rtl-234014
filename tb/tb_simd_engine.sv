// tb_simd_engine: random accumulator rows through the 32-lane SIMD engine.
//
// Tiles of 32 rows with random settings (scalar, ReLU, shift, pooling) and
// idle gaps between rows. Outputs are compared with the lane reference and,
// with pooling, with the lane-wise maximum of each row pair; an output must
// appear exactly one cycle after its (second) input row and never
// otherwise. Counts that saturation, ReLU and pooling all occurred.
module tb_simd_engine;
  import tb_ent_ref_pkg::*;
  import ent_pkg::*;

  localparam int L = 32, IW = 21;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, in_valid = 1'b0, out_valid;
  simd_cfg_t cfg;
  logic [L-1:0][IW-1:0] in_row;
  logic [L-1:0][7:0]    out_row;
  int exp_q [L];
  int held [L];
  bit exp_v;
  int checks = 0, failures = 0;
  int n_sat = 0, n_relu = 0, n_pool = 0;

  simd_engine #(.LANES(L), .IN_W(IW)) dut (.clk, .rst_n, .start, .cfg, .in_valid, .in_row, .out_valid, .out_row);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_row = '0;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int tile = 0; tile < 60; tile++) begin
      @(negedge clk);
      cfg.scalar = 16'($urandom_range(0, 2000) - 1000);
      cfg.relu   = tile[0];
      cfg.shift  = 5'($urandom_range(0, 12));
      cfg.pool   = tile[1];
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int r = 0; r < 32; r++) begin
        int v;
        in_valid = 1'b1;
        for (int l = 0; l < L; l++) begin
          v = int'($urandom_range(0, 1 << 20)) - (1 << 19);
          if (l < 4) v = int'($urandom_range(0, 600)) - 300;
          in_row[l] = IW'(v);
          v = ref_simd(v, int'(cfg.scalar), cfg.relu, int'(cfg.shift));
          if (cfg.pool && r[0]) v = (held[l] > v) ? held[l] : v;
          if (cfg.pool && !r[0]) held[l] = v;
          exp_q[l] = v;
        end
        exp_v = !cfg.pool || r[0];
        @(posedge clk);
        #1;
        checks++;
        if (out_valid !== exp_v) begin
          failures++;
          $display("FAIL valid tile %0d row %0d", tile, r);
        end
        if (exp_v) begin
          if (cfg.pool) n_pool++;
          for (int l = 0; l < L; l++) begin
            int y;
            y = int'(signed'(in_row[l])) + int'(cfg.scalar);
            if (cfg.relu && y < 0) n_relu++;
            if (y >>> cfg.shift > 127 || y >>> cfg.shift < -128) n_sat++;
            checks++;
            if (int'(signed'(out_row[l])) != exp_q[l]) begin
              failures++;
              if (failures < 10) $display("FAIL tile %0d row %0d lane %0d got %0d exp %0d", tile, r, l, signed'(out_row[l]), exp_q[l]);
            end
          end
        end
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom_range(0, 3) == 0) begin
          @(posedge clk);
          #1;
          checks++;
          if (out_valid) begin
            failures++;
            $display("FAIL stray out_valid");
          end
          @(negedge clk);
        end
      end
    end
    checks++;
    if (n_sat == 0 || n_relu == 0 || n_pool == 0) begin
      failures++;
      $display("FAIL coverage sat=%0d relu=%0d pool=%0d", n_sat, n_relu, n_pool);
    end
    $display("saturations=%0d relu_clamps=%0d pooled_rows=%0d", n_sat, n_relu, n_pool);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
