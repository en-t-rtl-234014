// tb_ent_sram: random reads and writes against an associative-array model
// at the default 256 KB size. Read data appear one cycle after re and a
// read of the address being written returns the old word.
module tb_ent_sram;
  localparam int D = 8192, W = 256;
  logic clk = 1'b0, re = 1'b0, we = 1'b0;
  logic [12:0]  raddr, waddr;
  logic [W-1:0] rdata, wdata, expect_q;
  logic [W-1:0] model [int];
  int checks = 0, failures = 0;

  ent_sram #(.DEPTH(D), .WIDTH(W)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    raddr = '0; waddr = '0; wdata = '0;
    // Fill a window of addresses, plus the first and last word.
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 13'((a < 254) ? a + 100 : (a == 254 ? 0 : D - 1));
      wdata = rnd_word();
      model[int'(waddr)] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int t = 0; t < 20000; t++) begin
      int ra;
      @(negedge clk);
      ra = int'($urandom_range(100, 353));
      if (t % 50 == 0) ra = 0;
      if (t % 50 == 1) ra = D - 1;
      re = 1'b1; raddr = 13'(ra);
      we = ($urandom_range(0, 1) == 1);
      waddr = (t % 3 == 0) ? raddr : 13'($urandom_range(100, 353));
      wdata = rnd_word();
      expect_q = model[ra];
      @(posedge clk);
      if (we) model[int'(waddr)] = wdata;
      #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL addr=%0d", ra);
      end
      // Data hold while re is low.
      @(negedge clk);
      re = 1'b0; we = 1'b0;
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== expect_q) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
