// soc_driver: test program for one ent_soc instance.
//
// Writes a random activation tile X and weight tile W into the global
// buffer through the external port (X as columns for the step-wise units,
// as rows for the weight-stationary ones), loads them into the activation
// and weight buffers, runs two GEMM tiles (scalar + ReLU + shift without
// pooling, then shift with 2x1 max pooling) and reads the results back.
// Results are compared with C = X * W and the SIMD lane reference. The TCU
// must take its S operand steps (or S activation rows) on S consecutive
// cycles, i.e. S*S multiply-accumulates per cycle. Reports counts of the
// mechanisms exercised: negative (sign bit) and -1-digit weights, -128
// operands, ReLU clamps, saturation, pooled rows, reloads of the buffers.
module soc_driver #(
  parameter ent_pkg::tcu_arch_e ARCH = ent_pkg::ARCH_SYS_WS,
  parameter int unsigned        S    = 32
) (
  input  logic                        clk,
  output logic                        rst_n,
  output logic                        instr_valid,
  input  logic                        instr_ready,
  output ent_pkg::instr_t             instr,
  input  logic                        busy,
  output logic                        ext_re,
  output logic [ent_pkg::GB_AW-1:0]   ext_raddr,
  input  logic [ent_pkg::WORD_W-1:0]  ext_rdata,
  output logic                        ext_we,
  output logic [ent_pkg::GB_AW-1:0]   ext_waddr,
  output logic [ent_pkg::WORD_W-1:0]  ext_wdata,
  input  logic                        tcu_step,    // operand step / activation row into the TCU
  output logic                        done,
  output int                          checks,
  output int                          failures,
  output int                          n_neg_w,
  output int                          n_mone,
  output int                          n_min,
  output int                          n_relu,
  output int                          n_sat,
  output int                          n_pool,
  output int                          n_gemm
);
  import ent_pkg::*;
  import tb_ent_ref_pkg::*;

  int X [S][S];
  int W [S][S];
  int C [S][S];
  int step_run, step_max;

  // Longest run of consecutive TCU steps.
  always @(posedge clk) begin
    if (tcu_step) begin
      step_run <= step_run + 1;
      if (step_run + 1 > step_max) step_max <= step_run + 1;
    end else step_run <= 0;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL arch=%0d %s", ARCH, what);
    end
  endtask

  task automatic ext_write(int a, logic [WORD_W-1:0] d);
    @(negedge clk);
    ext_we = 1'b1; ext_waddr = GB_AW'(a); ext_wdata = d;
    @(negedge clk);
    ext_we = 1'b0;
  endtask

  task automatic ext_read(int a, output logic [WORD_W-1:0] d);
    @(negedge clk);
    ext_re = 1'b1; ext_raddr = GB_AW'(a);
    @(negedge clk);
    ext_re = 1'b0;
    d = ext_rdata;
  endtask

  task automatic run_instr(instr_t i, output int cycles);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr_valid = 1'b1;
    instr = i;
    @(negedge clk);
    instr_valid = 1'b0;
    cycles = 1;
    while (busy) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  task automatic gemm_and_check(simd_cfg_t cfg, int out_base);
    instr_t i;
    int cyc, nrows;
    logic [WORD_W-1:0] d;
    i = '0;
    i.op = OP_GEMM;
    i.gb_addr = GB_AW'(out_base);
    i.act_addr = BUF_AW'(10);
    i.wgt_addr = BUF_AW'(500);
    i.simd = cfg;
    step_max = 0;
    run_instr(i, cyc);
    n_gemm++;
    check(step_max == S, $sformatf("TCU steps in one run %0d, expected %0d", step_max, S));
    nrows = cfg.pool ? S / 2 : S;
    for (int r = 0; r < nrows; r++) begin
      ext_read(out_base + r, d);
      for (int j = 0; j < S; j++) begin
        int y, y2, pre;
        pre = C[cfg.pool ? 2 * r : r][j] + int'(cfg.scalar);
        if (cfg.relu && pre < 0) n_relu++;
        if ((pre >>> cfg.shift) > 127 || (pre >>> cfg.shift) < -128) n_sat++;
        y = ref_simd(C[cfg.pool ? 2 * r : r][j], int'(cfg.scalar), cfg.relu, int'(cfg.shift));
        if (cfg.pool) begin
          y2 = ref_simd(C[2 * r + 1][j], int'(cfg.scalar), cfg.relu, int'(cfg.shift));
          if (y2 > y) y = y2;
        end
        check(int'(signed'(d[8*j +: 8])) == y,
              $sformatf("result row %0d col %0d got %0d exp %0d", r, j, signed'(d[8*j +: 8]), y));
      end
      if (cfg.pool) n_pool++;
    end
  endtask

  initial begin
    instr_t i;
    int cyc;
    logic [WORD_W-1:0] d;
    simd_cfg_t cfg;
    rst_n = 1'b0;
    done = 1'b0;
    checks = 0; failures = 0;
    n_neg_w = 0; n_mone = 0; n_min = 0; n_relu = 0; n_sat = 0; n_pool = 0; n_gemm = 0;
    step_run = 0; step_max = 0;
    instr_valid = 1'b0; instr = '0;
    ext_re = 1'b0; ext_we = 1'b0; ext_raddr = '0; ext_waddr = '0; ext_wdata = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    for (int rep = 0; rep < 2; rep++) begin
      // Operands: random INT8 with a row and a column of -128.
      for (int a = 0; a < S; a++)
        for (int b = 0; b < S; b++) begin
          X[a][b] = (a == 1 || rep == 1 && b == 2) ? -128 : rand_int8();
          W[a][b] = (b == 3 || rep == 1 && a == 0) ? -128 : rand_int8();
        end
      for (int a = 0; a < S; a++)
        for (int b = 0; b < S; b++) begin
          logic [8:0] e;
          C[a][b] = 0;
          for (int k = 0; k < S; k++) C[a][b] += X[a][k] * W[k][b];
          e = ref_encode(W[a][b]);
          if (e[8]) n_neg_w++;
          for (int q = 0; q < 4; q++) if (e[2*q +: 2] == 2'b11) n_mone++;
          if (W[a][b] == -128 || X[a][b] == -128) n_min++;
        end
      // Global buffer: X at 0.., W at 64..
      for (int a = 0; a < S; a++) begin
        d = '0;
        for (int b = 0; b < S; b++)
          d[8*b +: 8] = arch_is_ws(ARCH) ? 8'(X[a][b]) : 8'(X[b][a]);
        ext_write(a, d);
        d = '0;
        for (int b = 0; b < S; b++) d[8*b +: 8] = 8'(W[a][b]);
        ext_write(64 + a, d);
      end
      i = '0;
      i.op = OP_LOAD_ACT; i.gb_addr = '0; i.act_addr = BUF_AW'(10); i.len = (BUF_AW+1)'(S);
      run_instr(i, cyc);
      check(cyc == S + 2, $sformatf("LOAD_ACT took %0d cycles", cyc));
      i.op = OP_LOAD_WGT; i.gb_addr = GB_AW'(64); i.wgt_addr = BUF_AW'(500);
      run_instr(i, cyc);

      cfg = '0;
      cfg.scalar = 16'(rep == 0 ? -3000 : 1500);
      cfg.relu = 1'b1;
      cfg.shift = 5'd8;
      gemm_and_check(cfg, 200);
      cfg = '0;
      cfg.scalar = 16'(17);
      cfg.shift = 5'd9;
      cfg.pool = 1'b1;
      gemm_and_check(cfg, 300);
    end
    done = 1'b1;
  end
endmodule
