// tb_ent_mult: exhaustive check of the encoder-less multiplier.
//
// Every 9-bit encoded multiplicand code (all sign/digit combinations, not
// only those the encoder produces) is multiplied by every 8-bit multiplier;
// the product must equal decode(enc) * b.
module tb_ent_mult;
  import tb_ent_ref_pkg::*;

  logic              clk = 1'b0;
  logic [8:0]        enc;
  logic signed [7:0] b;
  logic signed [15:0] p;
  int checks = 0, failures = 0;

  ent_mult #(.N(8)) dut (.enc(enc), .b(b), .p(p));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 512; e++) begin
      for (int v = -128; v < 128; v++) begin
        enc = 9'(e);
        b   = 8'(v);
        @(posedge clk);
        checks++;
        if (int'(p) != ref_decode(9'(e)) * v) begin
          failures++;
          if (failures < 10) $display("FAIL enc=%b b=%0d p=%0d exp=%0d", enc, v, p, ref_decode(9'(e)) * v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
