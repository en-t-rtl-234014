// tb_ent_pe: random multiply-accumulate sequences through one PE.
//
// Weights are encoded by the reference encoder; each sequence starts with
// clr+en and the accumulator is compared with a model after every cycle,
// including idle cycles (en low) and a plain clear.
module tb_ent_pe;
  import tb_ent_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [8:0]        enc;
  logic signed [7:0] b;
  logic signed [20:0] acc;
  int model = 0;
  int checks = 0, failures = 0;

  ent_pe #(.N(8), .ACC_W(21)) dut (.clk, .rst_n, .clr, .en, .enc, .b, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enc = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      int a, x;
      @(negedge clk);
      a   = (t % 7 == 0) ? -128 : rand_int8();
      x   = (t % 11 == 0) ? -128 : rand_int8();
      enc = ref_encode(a);
      b   = 8'(x);
      clr = (t % 32 == 0) || (t % 97 == 5);
      en  = (t % 32 == 0) || ($urandom_range(0, 3) != 0);
      if (en)       model = (clr ? 0 : model) + a * x;
      else if (clr) model = 0;
      @(posedge clk);
      #1;
      checks++;
      if (int'(acc) != model) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d acc=%0d exp=%0d", t, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
