// ent_soc: EN-T neural processing unit (benchmark SoC) with one S x S TCU.
//
// The tensor computing unit (TCU) never sees raw weights: the weight
// buffer's read-out passes through a bank of S registered EN-T encoders,
// and only the N+1-bit encoded weights enter the array, where the PEs keep
// just the partial-product selection and the adders of a multiplier.
// Activations go from the activation buffer to the array unchanged.
//
//   global buffer (256 KB) --LOAD--> activation buffer (32 KB) -----------+
//                          --LOAD--> weight buffer (32 KB) -> encoders ---+-> TCU
//   global buffer <---------------- SIMD engine (32 lanes) <--------------+
//
// ARCH selects the TCU microarchitecture: 2D Matrix, 1D/2D Array, systolic
// output- or weight-stationary, or two 8^3 cubes. The controller executes
// LOAD_ACT, LOAD_WGT and GEMM instructions (see controller and ent_pkg).
// Off-chip memory is not part of this block: the global buffer's external
// port (ext_*) takes its place and may be used only while busy is low.
//
// Timing: a read issued by the controller in cycle t gives SRAM data at
// t+1; the encoder bank registers the weights and a matching register
// delays the activations, so both reach the TCU at t+2. TCU result rows go
// through the SIMD engine (one cycle) into the global buffer.
//
// Follows the paper: the block set and sizes of the benchmark SoC, the 32
// registered encoders on the weight read-out, the five TCU types, 32-lane
// SIMD post-processing. Own choice: word width, ports, instruction set,
// control timing; the instruction cache, img2col and DRAM are not included.
module ent_soc #(
  parameter ent_pkg::tcu_arch_e ARCH = ent_pkg::ARCH_SYS_WS,
  parameter int unsigned        S    = ent_pkg::ARRAY_S
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        instr_valid,
  output logic                        instr_ready,
  input  ent_pkg::instr_t             instr,
  output logic                        busy,
  // global buffer external port (off-chip memory side)
  input  logic                        ext_re,
  input  logic [ent_pkg::GB_AW-1:0]   ext_raddr,
  output logic [ent_pkg::WORD_W-1:0]  ext_rdata,
  input  logic                        ext_we,
  input  logic [ent_pkg::GB_AW-1:0]   ext_waddr,
  input  logic [ent_pkg::WORD_W-1:0]  ext_wdata
);
  import ent_pkg::*;

  localparam int unsigned N     = DATA_W;
  localparam int unsigned TACC_W = 16 + $clog2(S);

  // Controller outputs.
  logic              c_gb_re, c_gb_we, act_we, act_re, wgt_we, wgt_re;
  logic [GB_AW-1:0]  c_gb_raddr, c_gb_waddr;
  logic [BUF_AW-1:0] act_waddr, act_raddr, wgt_waddr, wgt_raddr;
  logic              rd_x, rd_w, simd_start;
  simd_cfg_t         simd_cfg;

  // Data paths.
  logic [WORD_W-1:0]          gb_rdata, act_rdata, wgt_rdata;
  logic [S-1:0][N-1:0]        x_q;
  logic                       rd_x_q, rd_x_qq;
  logic                       enc_valid;
  logic [S-1:0][N:0]          enc_row;
  logic                       c_valid;
  logic [S-1:0][TACC_W-1:0]    c_row;
  logic                       simd_valid;
  logic [S-1:0][7:0]          simd_row;

  controller #(.ARCH(ARCH), .S(S)) u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr, .busy,
    .gb_re(c_gb_re), .gb_raddr(c_gb_raddr), .gb_we(c_gb_we), .gb_waddr(c_gb_waddr),
    .act_we, .act_waddr, .act_re, .act_raddr,
    .wgt_we, .wgt_waddr, .wgt_re, .wgt_raddr,
    .rd_x, .rd_w, .simd_start, .simd_cfg,
    .simd_out_valid(simd_valid)
  );

  // Global buffer: the controller owns it while busy, the external port otherwise.
  ent_sram #(.DEPTH(GB_DEPTH), .WIDTH(WORD_W)) u_gbuf (
    .clk,
    .re   (busy ? c_gb_re : ext_re),
    .raddr(busy ? c_gb_raddr : ext_raddr),
    .rdata(gb_rdata),
    .we   (busy ? c_gb_we : ext_we),
    .waddr(busy ? c_gb_waddr : ext_waddr),
    .wdata(busy ? WORD_W'(simd_row) : ext_wdata)
  );
  assign ext_rdata = gb_rdata;

  ent_sram #(.DEPTH(ACT_DEPTH), .WIDTH(WORD_W)) u_abuf (
    .clk, .re(act_re), .raddr(act_raddr), .rdata(act_rdata),
    .we(act_we), .waddr(act_waddr), .wdata(gb_rdata));

  ent_sram #(.DEPTH(WGT_DEPTH), .WIDTH(WORD_W)) u_wbuf (
    .clk, .re(wgt_re), .raddr(wgt_raddr), .rdata(wgt_rdata),
    .we(wgt_we), .waddr(wgt_waddr), .wdata(gb_rdata));

  // Weight read-out through the encoders (register output) ...
  logic rd_w_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_w_q  <= 1'b0;
      rd_x_q  <= 1'b0;
      rd_x_qq <= 1'b0;
    end else begin
      rd_w_q  <= rd_w;
      rd_x_q  <= rd_x;
      rd_x_qq <= rd_x_q;
    end
    // ... and the activations delayed to match.
    if (rd_x_q) x_q <= act_rdata[S*N-1:0];
  end

  encoder_bank #(.LANES(S), .N(N)) u_enc (
    .clk, .rst_n,
    .in_valid (rd_w_q),
    .w_row    (wgt_rdata[S*N-1:0]),
    .out_valid(enc_valid),
    .enc_row  (enc_row)
  );

  // Tensor computing unit.
  if (ARCH == ARCH_MATRIX2D) begin : g_tcu
    tcu_matrix2d #(.S(S), .N(N), .ACC_W(TACC_W)) u_tcu (
      .clk, .rst_n, .in_valid(enc_valid), .x_vec(x_q), .w_row(enc_row),
      .c_valid, .c_row);
  end else if (ARCH == ARCH_SYS_OS) begin : g_tcu
    tcu_systolic_os #(.S(S), .N(N), .ACC_W(TACC_W)) u_tcu (
      .clk, .rst_n, .in_valid(enc_valid), .x_vec(x_q), .w_row(enc_row),
      .c_valid, .c_row);
  end else if (ARCH == ARCH_CUBE3D) begin : g_tcu
    tcu_cube3d #(.S(S), .CUBE(8), .NCUBE(2), .N(N), .ACC_W(TACC_W)) u_tcu (
      .clk, .rst_n, .in_valid(enc_valid), .x_vec(x_q), .w_row(enc_row),
      .c_valid, .c_row);
  end else if (ARCH == ARCH_ARRAY1D2D) begin : g_tcu
    tcu_array1d2d #(.S(S), .N(N), .ACC_W(TACC_W)) u_tcu (
      .clk, .rst_n, .w_valid(enc_valid), .w_row(enc_row),
      .x_valid(rd_x_qq), .x_vec(x_q), .c_valid, .c_row);
  end else begin : g_tcu
    tcu_systolic_ws #(.S(S), .N(N), .ACC_W(TACC_W)) u_tcu (
      .clk, .rst_n, .w_valid(enc_valid), .w_row(enc_row),
      .x_valid(rd_x_qq), .x_vec(x_q), .c_valid, .c_row);
  end

  simd_engine #(.LANES(S), .IN_W(TACC_W)) u_simd (
    .clk, .rst_n, .start(simd_start), .cfg(simd_cfg),
    .in_valid(c_valid), .in_row(c_row),
    .out_valid(simd_valid), .out_row(simd_row)
  );

  // Operands reach the TCU together in the step-wise architectures.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                              !arch_is_ws(ARCH) && enc_valid |-> rd_x_qq);
  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               busy |-> !(ext_we || ext_re));

endmodule
