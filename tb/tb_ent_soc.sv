// tb_ent_soc: end-to-end test of the NPU with each of the five TCU
// microarchitectures, at S = 8 (S = 16 for the cube, whose 8^3 blocks need
// at least two per side) to keep the build short.
//
// Each SoC instance is driven by soc_driver: global buffer writes, LOAD_ACT,
// LOAD_WGT, GEMM with and without pooling, results read back and checked,
// twice with fresh operands. Every mechanism must have occurred at least
// once: each architecture's GEMM, negative and -1-digit encoded weights,
// -128 operands, ReLU clamping, INT8 saturation and pooling.
module tb_ent_soc;
  import ent_pkg::*;

  localparam int NA = 5;
  localparam tcu_arch_e ARCHS [NA] = '{ARCH_MATRIX2D, ARCH_ARRAY1D2D, ARCH_SYS_OS, ARCH_SYS_WS, ARCH_CUBE3D};
  localparam int        SIZES [NA] = '{8, 8, 8, 8, 16};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done [NA];
  int ck [NA], fl [NA], neg [NA], mone [NA], mn [NA], relu [NA], sat [NA], pool [NA], gemm [NA];

  for (genvar a = 0; a < NA; a++) begin : g_a
    logic rst_n, instr_valid, instr_ready, busy, ext_re, ext_we;
    instr_t instr;
    logic [GB_AW-1:0]  ext_raddr, ext_waddr;
    logic [WORD_W-1:0] ext_rdata, ext_wdata;
    logic tcu_step;

    ent_soc #(.ARCH(ARCHS[a]), .S(SIZES[a])) u_dut (
      .clk, .rst_n, .instr_valid, .instr_ready, .instr, .busy,
      .ext_re, .ext_raddr, .ext_rdata, .ext_we, .ext_waddr, .ext_wdata);

    // Operand steps for step-wise units, activation rows for the others.
    assign tcu_step = arch_is_ws(ARCHS[a]) ? u_dut.rd_x_qq : u_dut.enc_valid;

    soc_driver #(.ARCH(ARCHS[a]), .S(SIZES[a])) u_drv (
      .clk, .rst_n, .instr_valid, .instr_ready, .instr, .busy,
      .ext_re, .ext_raddr, .ext_rdata, .ext_we, .ext_waddr, .ext_wdata,
      .tcu_step, .done(done[a]), .checks(ck[a]), .failures(fl[a]),
      .n_neg_w(neg[a]), .n_mone(mone[a]), .n_min(mn[a]), .n_relu(relu[a]),
      .n_sat(sat[a]), .n_pool(pool[a]), .n_gemm(gemm[a]));
  end

  int checks, failures;

  task automatic report();
    checks = 0;
    failures = 0;
    for (int a = 0; a < NA; a++) begin
      checks += ck[a];
      failures += fl[a];
      $display("arch %0d: gemm=%0d neg_w=%0d mone_digits=%0d min_operands=%0d relu=%0d sat=%0d pooled_rows=%0d",
               a, gemm[a], neg[a], mone[a], mn[a], relu[a], sat[a], pool[a]);
      checks += 1;
      if (gemm[a] == 0 || neg[a] == 0 || mone[a] == 0 || mn[a] == 0 || relu[a] == 0 ||
          sat[a] == 0 || pool[a] == 0) begin
        failures++;
        $display("FAIL arch %0d: a mechanism never occurred", a);
      end
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    report();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10) @(posedge clk);
    wait (done[0] && done[1] && done[2] && done[3] && done[4]);
    @(posedge clk);
    report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
