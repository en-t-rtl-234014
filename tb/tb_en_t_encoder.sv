// tb_en_t_encoder: exhaustive check of the EN-T encoder at 8 bits and a
// random check at 16 bits.
//
// For every 8-bit input the encoded word must decode (sign, digits in
// {0,1,2,-1}) to the input and equal the reference recursion. The worked
// example 78 -> {0, 1, 1, -1, 2} is checked bit by bit.
module tb_en_t_encoder;
  import tb_ent_ref_pkg::*;

  logic        clk = 1'b0;
  logic [7:0]  a8;
  logic [8:0]  e8;
  logic [15:0] a16;
  logic [16:0] e16;
  int checks = 0, failures = 0;

  en_t_encoder #(.N(8))  dut8  (.a(a8),  .enc(e8));
  en_t_encoder #(.N(16)) dut16 (.a(a16), .enc(e16));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      a8 = 8'(v);
      @(posedge clk);
      checks++;
      if (ref_decode(e8) != v || e8 !== ref_encode(v)) begin
        failures++;
        $display("FAIL a=%0d enc=%b ref=%b decoded=%0d", v, e8, ref_encode(v), ref_decode(e8));
      end
    end
    // Example of the paper's computing method: 78 = 1*64 + 1*16 - 1*4 + 2.
    a8 = 8'd78;
    @(posedge clk);
    checks++;
    if (e8 !== 9'b0_01_01_11_10) begin
      failures++;
      $display("FAIL enc(78)=%b", e8);
    end
    // 16-bit: random values decode correctly (8 digits).
    for (int t = 0; t < 2000; t++) begin
      int v, d;
      v = int'($urandom_range(0, 65535)) - 32768;
      d = 0;
      a16 = 16'(v);
      @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        int w;
        w = int'(e16[2*i +: 2]);
        if (w == 3) w = -1;
        d += w * (4 ** i);
      end
      if (e16[16]) d = -d;
      checks++;
      if (d != v) begin
        failures++;
        $display("FAIL16 a=%0d decoded=%0d", v, d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
