// controller: instruction sequencer of the EN-T NPU.
//
// Takes one instruction at a time (valid/ready) and drives the SRAM ports,
// the operand pipeline into the tensor unit and the SIMD engine:
//   LOAD_ACT / LOAD_WGT  copy len words from the global buffer, starting at
//                        gb_addr, to the activation / weight buffer at
//                        act_addr / wgt_addr (one word per cycle; the write
//                        follows its read by one cycle);
//   GEMM                 one S x S x S tile C = X * W. The weight buffer
//                        words wgt_addr .. +S-1 are the rows W[k][*]. For the
//                        weight-stationary units (ARCH_SYS_WS,
//                        ARCH_ARRAY1D2D) the S weight rows are read first and
//                        then the activation rows X[i][*] at act_addr + i.
//                        For the others one weight row and the activation
//                        column X[*][k] at act_addr + k are read together in
//                        step k. The SIMD engine's rows are written to the
//                        global buffer at gb_addr, gb_addr + 1, ...; the
//                        instruction ends when the last one is written
//                        (S rows, S/2 with pooling).
// Reads issued here reach the tensor unit two cycles later (SRAM read, then
// the encoder register or the matching activation register in ent_soc);
// rd_x / rd_w mark the issue cycles.
//
// Follows the paper: a controller in charge of SRAM reads and writes around
// the TCU and SIMD engine. Own choice: the instruction set, the handshake,
// the data layouts and all timing. The img2col unit is not included.
module controller #(
  parameter ent_pkg::tcu_arch_e ARCH = ent_pkg::ARCH_SYS_WS,
  parameter int unsigned        S    = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // instruction port
  input  logic                        instr_valid,
  output logic                        instr_ready,
  input  ent_pkg::instr_t             instr,
  output logic                        busy,
  // global buffer
  output logic                        gb_re,
  output logic [ent_pkg::GB_AW-1:0]   gb_raddr,
  output logic                        gb_we,
  output logic [ent_pkg::GB_AW-1:0]   gb_waddr,
  // activation and weight buffers
  output logic                        act_we,
  output logic [ent_pkg::BUF_AW-1:0]  act_waddr,
  output logic                        act_re,
  output logic [ent_pkg::BUF_AW-1:0]  act_raddr,
  output logic                        wgt_we,
  output logic [ent_pkg::BUF_AW-1:0]  wgt_waddr,
  output logic                        wgt_re,
  output logic [ent_pkg::BUF_AW-1:0]  wgt_raddr,
  // operand issue flags and SIMD control
  output logic                        rd_x,
  output logic                        rd_w,
  output logic                        simd_start,
  output ent_pkg::simd_cfg_t          simd_cfg,
  input  logic                        simd_out_valid
);
  import ent_pkg::*;

  typedef enum logic [2:0] {IDLE, LOAD, LOAD_END, ISSUE_W, ISSUE_X, ISSUE_XW, DRAIN} state_e;

  localparam bit WS = arch_is_ws(ARCH);
  localparam int unsigned CW = $clog2(S);

  state_e          state;
  instr_t          cur;
  logic [BUF_AW:0] n;            // words copied / steps issued
  logic [CW:0]     rows;         // result rows written
  logic            wr_pend;      // a LOAD read whose write is due
  logic            wr_act;       // ... and its destination
  logic [BUF_AW-1:0] wr_addr;
  logic [CW:0]     rows_exp;

  assign instr_ready = (state == IDLE);
  assign busy        = (state != IDLE);
  assign simd_cfg    = cur.simd;
  assign rows_exp    = cur.simd.pool ? (CW+1)'(S / 2) : (CW+1)'(S);

  // Combinational port drive from the state.
  always_comb begin
    gb_re     = 1'b0;
    gb_raddr  = cur.gb_addr + GB_AW'(n);
    act_re    = 1'b0;
    wgt_re    = 1'b0;
    act_raddr = cur.act_addr + BUF_AW'(n);
    wgt_raddr = cur.wgt_addr + BUF_AW'(n);
    rd_x      = 1'b0;
    rd_w      = 1'b0;
    unique case (state)
      LOAD:     gb_re = 1'b1;
      ISSUE_W:  begin wgt_re = 1'b1; rd_w = 1'b1; end
      ISSUE_X:  begin act_re = 1'b1; rd_x = 1'b1; end
      ISSUE_XW: begin act_re = 1'b1; wgt_re = 1'b1; rd_x = 1'b1; rd_w = 1'b1; end
      default: ;
    endcase
    act_we    = wr_pend &&  wr_act;
    wgt_we    = wr_pend && !wr_act;
    act_waddr = wr_addr;
    wgt_waddr = wr_addr;
    gb_we     = simd_out_valid && (state inside {ISSUE_X, ISSUE_XW, DRAIN});
    gb_waddr  = cur.gb_addr + GB_AW'(rows);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= IDLE;
      cur        <= '0;
      n          <= '0;
      rows       <= '0;
      wr_pend    <= 1'b0;
      simd_start <= 1'b0;
    end else begin
      wr_pend    <= 1'b0;
      simd_start <= 1'b0;
      // Result rows can come back while activations are still issued.
      if (gb_we) rows <= rows + 1'b1;
      unique case (state)
        IDLE: if (instr_valid) begin
          cur  <= instr;
          n    <= '0;
          rows <= '0;
          unique case (instr.op)
            OP_LOAD_ACT, OP_LOAD_WGT: state <= (instr.len == '0) ? IDLE : LOAD;
            OP_GEMM: begin
              state      <= WS ? ISSUE_W : ISSUE_XW;
              simd_start <= 1'b1;
            end
            default: state <= IDLE;
          endcase
        end
        LOAD: begin
          wr_pend <= 1'b1;
          wr_act  <= (cur.op == OP_LOAD_ACT);
          wr_addr <= (cur.op == OP_LOAD_ACT ? cur.act_addr : cur.wgt_addr) + BUF_AW'(n);
          n       <= n + 1'b1;
          if (n + 1'b1 == cur.len) state <= LOAD_END;
        end
        LOAD_END: state <= IDLE;   // the last write goes out this cycle
        ISSUE_W: begin
          n <= n + 1'b1;
          if (n == (BUF_AW+1)'(S - 1)) begin
            n     <= '0;
            state <= ISSUE_X;
          end
        end
        ISSUE_X, ISSUE_XW: begin
          n <= n + 1'b1;
          if (n == (BUF_AW+1)'(S - 1)) state <= DRAIN;
        end
        default:  // DRAIN
          if (gb_we && rows + 1'b1 == rows_exp) state <= IDLE;
      endcase
    end
  end

  a_no_stray_rows: assert property (@(posedge clk) disable iff (!rst_n)
                                    simd_out_valid |-> state inside {ISSUE_X, ISSUE_XW, DRAIN});

endmodule
