// ent_sram: on-chip SRAM buffer (global, activation or weight buffer).
//
// A DEPTH x WIDTH memory array with one synchronous read port and one
// synchronous write port. Read data appear one cycle after re and hold
// until the next read. A read and a write to the same address in the same
// cycle return the old word. The default size, 8192 words of 256 bits, is
// the 256 KB global buffer; the activation and weight buffers are 1024
// words (32 KB) each.
//
// Follows the paper: the buffer sizes. Own choice: the word width (one
// 32-byte row of the array per word), two ports and the read latency; a
// memory-compiler macro would take this array's place in silicon.
module ent_sram #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
