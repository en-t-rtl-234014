// tb_encoder_bank: random weight rows through the 32-lane registered
// encoder bank. Each lane must equal the reference encoding one cycle
// after the row, and out_valid must follow in_valid by exactly one cycle.
module tb_encoder_bank;
  import tb_ent_ref_pkg::*;

  localparam int L = 32;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [L-1:0][7:0] w_row;
  logic [L-1:0][8:0] enc_row;
  logic [L-1:0][8:0] exp_row;
  logic              exp_valid;
  int checks = 0, failures = 0;

  encoder_bank #(.LANES(L), .N(8)) dut (.clk, .rst_n, .in_valid, .w_row, .out_valid, .enc_row);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    exp_valid = 1'b0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      for (int l = 0; l < L; l++) w_row[l] = 8'(rand_int8());
      if (t == 3) for (int l = 0; l < L; l++) w_row[l] = 8'(l * 8 - 128);
      @(posedge clk);
      #1;
      checks++;
      if (out_valid !== in_valid) begin
        failures++;
        $display("FAIL valid t=%0d", t);
      end
      if (in_valid)
        for (int l = 0; l < L; l++) begin
          checks++;
          if (enc_row[l] !== ref_encode(int'(signed'(w_row[l])))) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d w=%0d enc=%b", l, signed'(w_row[l]), enc_row[l]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
