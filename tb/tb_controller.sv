// tb_controller: instruction sequencing of the controller, for a
// weight-stationary unit (ARCH_SYS_WS) and a step-wise one (ARCH_MATRIX2D).
//
// The testbench plays the SIMD engine: it returns result rows some cycles
// after the reads. Checked cycle by cycle: LOAD copies (read address, write
// one cycle later to the right buffer and address), GEMM read order (all
// weight rows then all activation rows, or both together per step), result
// write addresses, the pooled row count, busy and instr_ready.
module tb_controller;
  import ent_pkg::*;

  localparam int S = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Two controllers driven with the same instructions.
  logic        iv [2];
  logic        ir [2];
  instr_t      ins [2];
  logic        busy [2];
  logic        gb_re [2], gb_we [2], act_we [2], act_re [2], wgt_we [2], wgt_re [2];
  logic [GB_AW-1:0]  gb_raddr [2], gb_waddr [2];
  logic [BUF_AW-1:0] act_waddr [2], act_raddr [2], wgt_waddr [2], wgt_raddr [2];
  logic        rd_x [2], rd_w [2], simd_start [2], sov [2];
  simd_cfg_t   scfg [2];

  for (genvar u = 0; u < 2; u++) begin : g_u
    controller #(.ARCH(u == 0 ? ARCH_SYS_WS : ARCH_MATRIX2D), .S(S)) dut (
      .clk, .rst_n, .instr_valid(iv[u]), .instr_ready(ir[u]), .instr(ins[u]), .busy(busy[u]),
      .gb_re(gb_re[u]), .gb_raddr(gb_raddr[u]), .gb_we(gb_we[u]), .gb_waddr(gb_waddr[u]),
      .act_we(act_we[u]), .act_waddr(act_waddr[u]), .act_re(act_re[u]), .act_raddr(act_raddr[u]),
      .wgt_we(wgt_we[u]), .wgt_waddr(wgt_waddr[u]), .wgt_re(wgt_re[u]), .wgt_raddr(wgt_raddr[u]),
      .rd_x(rd_x[u]), .rd_w(rd_w[u]), .simd_start(simd_start[u]), .simd_cfg(scfg[u]),
      .simd_out_valid(sov[u]));
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic issue(int u, instr_t i);
    @(negedge clk);
    check(ir[u] && !busy[u], "ready before issue");
    iv[u] = 1'b1;
    ins[u] = i;
    @(negedge clk);
    iv[u] = 1'b0;
  endtask

  // LOAD: len reads from gb_addr, each followed by a write one cycle later.
  task automatic run_load(int u, bit to_act, int gb, int buf_a, int len);
    instr_t i;
    i = '0;
    i.op = to_act ? OP_LOAD_ACT : OP_LOAD_WGT;
    i.gb_addr = GB_AW'(gb);
    i.act_addr = BUF_AW'(buf_a);
    i.wgt_addr = BUF_AW'(buf_a);
    i.len = (BUF_AW+1)'(len);
    issue(u, i);
    // now in the first LOAD cycle (sampled between edges)
    for (int n = 0; n <= len; n++) begin
      check(gb_re[u] == (n < len), "load read enable");
      if (n < len) check(int'(gb_raddr[u]) == gb + n, "load read address");
      if (n > 0) begin
        check((to_act ? act_we[u] : wgt_we[u]) && !(to_act ? wgt_we[u] : act_we[u]), "load write enable");
        check(int'(to_act ? act_waddr[u] : wgt_waddr[u]) == buf_a + n - 1, "load write address");
      end
      @(negedge clk);
    end
    check(!busy[u] && !act_we[u] && !wgt_we[u], "load finished");
  endtask

  // GEMM: read order, then result rows written to gb.
  task automatic run_gemm(int u, int ab, int wb, int ob, bit pool);
    instr_t i;
    int nrows, sent, seen;
    i = '0;
    i.op = OP_GEMM;
    i.gb_addr = GB_AW'(ob);
    i.act_addr = BUF_AW'(ab);
    i.wgt_addr = BUF_AW'(wb);
    i.simd.pool = pool;
    i.simd.shift = 5'd3;
    issue(u, i);
    if (u == 0) begin
      for (int k = 0; k < S; k++) begin
        check(wgt_re[u] && rd_w[u] && !act_re[u] && !rd_x[u], "ws weight phase");
        check(int'(wgt_raddr[u]) == (wb + k) % ACT_DEPTH, "ws weight address");
        @(negedge clk);
      end
      for (int k = 0; k < S; k++) begin
        check(act_re[u] && rd_x[u] && !wgt_re[u], "ws activation phase");
        check(int'(act_raddr[u]) == ab + k, "ws activation address");
        @(negedge clk);
      end
    end else begin
      for (int k = 0; k < S; k++) begin
        check(act_re[u] && wgt_re[u] && rd_x[u] && rd_w[u], "step phase");
        check(int'(act_raddr[u]) == ab + k && int'(wgt_raddr[u]) == (wb + k) % ACT_DEPTH, "step addresses");
        @(negedge clk);
      end
    end
    check(busy[u] && scfg[u].pool == pool && scfg[u].shift == 5'd3, "config held");
    nrows = pool ? S / 2 : S;
    sent = 0;
    seen = 0;
    while (sent < nrows) begin
      sov[u] = ($urandom_range(0, 2) != 0);
      #1;
      if (sov[u]) begin
        check(gb_we[u] && int'(gb_waddr[u]) == ob + sent, "result write");
        sent++;
      end else check(!gb_we[u], "no write without a row");
      @(negedge clk);
      sov[u] = 1'b0;
    end
    check(!busy[u] && ir[u], "gemm finished");
  endtask

  initial begin
    for (int u = 0; u < 2; u++) begin
      iv[u] = 1'b0; ins[u] = '0; sov[u] = 1'b0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int u = 0; u < 2; u++) begin
      run_load(u, 1, 100, 7, 5);
      run_load(u, 0, 8000, 1000, 24);
      run_gemm(u, 7, 1000, 4000, 0);
      run_gemm(u, 40, 300, 12, 1);
      run_load(u, 1, 5, 0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
