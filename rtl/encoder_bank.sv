// encoder_bank: the row of EN-T encoders on the weight buffer read-out.
//
// LANES en_t_encoder instances, one per array column, turn a row of raw
// INT8 weights into encoded multiplicands of N+1 bits. The outputs are
// registered, so the encoder's carry chain ends at a flip-flop and the
// array sees encoded weights from a register, as in the benchmark SoC (32
// encoders with register output). This bank replaces the S*S encoders that
// the multipliers inside the array would otherwise hold.
//
// Interface: in_valid/w_row in, out_valid/enc_row out one cycle later. No
// back-pressure. Synchronous active-low reset clears out_valid; the data
// register is not reset.
//
// Follows the paper: 32 encoders, register output, placement between weight
// buffer and array. Own choice: the valid bit and the reset.
module encoder_bank #(
  parameter int unsigned LANES = 32,
  parameter int unsigned N     = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [LANES-1:0][N-1:0]   w_row,
  output logic                      out_valid,
  output logic [LANES-1:0][N:0]     enc_row
);

  logic [LANES-1:0][N:0] enc_d;

  for (genvar l = 0; l < LANES; l++) begin : g_enc
    en_t_encoder #(.N(N)) u_enc (.a(w_row[l]), .enc(enc_d[l]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) enc_row <= enc_d;
  end

endmodule
