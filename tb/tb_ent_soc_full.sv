// tb_ent_soc_full: the NPU at its default parameters (32 x 32
// weight-stationary systolic TCU, 256 KB / 32 KB / 32 KB buffers), taken
// through the same program as tb_ent_soc: loads, two GEMM tiles with and
// without pooling, twice, all results checked against the reference.
module tb_ent_soc_full;
  import ent_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, instr_valid, instr_ready, busy, ext_re, ext_we, done;
  instr_t instr;
  logic [GB_AW-1:0]  ext_raddr, ext_waddr;
  logic [WORD_W-1:0] ext_rdata, ext_wdata;
  int checks, failures, neg, mone, mn, relu, sat, pool, gemm;

  ent_soc u_dut (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .busy,
    .ext_re, .ext_raddr, .ext_rdata, .ext_we, .ext_waddr, .ext_wdata);

  soc_driver #(.ARCH(ARCH_SYS_WS), .S(ARRAY_S)) u_drv (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .busy,
    .ext_re, .ext_raddr, .ext_rdata, .ext_we, .ext_waddr, .ext_wdata,
    .tcu_step(u_dut.rd_x_qq), .done, .checks, .failures,
    .n_neg_w(neg), .n_mone(mone), .n_min(mn), .n_relu(relu), .n_sat(sat),
    .n_pool(pool), .n_gemm(gemm));

  int tot_checks, tot_failures;

  task automatic report();
    tot_checks = checks + 1;
    tot_failures = failures;
    $display("gemm=%0d neg_w=%0d mone_digits=%0d min_operands=%0d relu=%0d sat=%0d pooled_rows=%0d",
             gemm, neg, mone, mn, relu, sat, pool);
    if (gemm == 0 || neg == 0 || mone == 0 || mn == 0 || relu == 0 || sat == 0 || pool == 0) begin
      tot_failures++;
      $display("FAIL: a mechanism never occurred");
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    report();
    tot_failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", tot_checks, tot_failures);
    $finish;
  end

  initial begin
    repeat (10) @(posedge clk);
    wait (done);
    @(posedge clk);
    report();
    $display("TB_RESULT checks=%0d failures=%0d", tot_checks, tot_failures);
    $finish;
  end
endmodule
