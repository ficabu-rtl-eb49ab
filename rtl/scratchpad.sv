// scratchpad -- on-chip scratchpad of the unlearning engine.
//
// Holds the operands of the patches in flight in the GEMM -> FIMD ->
// Dampening pipeline, in five regions built from sp_ram blocks:
//   gradient  2 slots x N_BATCH*PATCH INT8   write: GEMM engine   read: FIMD
//   I_Df      2 slots x PATCH 32-bit         write: FIMD          read: FIMD, Dampening
//   I_D       4 slots x PATCH 32-bit         write: DMA           read: Dampening
//   theta-in  4 slots x PATCH/4 words        write: DMA           read: Dampening
//   theta-out 2 slots x PATCH/4 words        write: Dampening     read: DMA
// Theta words pack four INT8 parameters. The I_Df region is kept twice with
// identical contents so that FIMD and Dampening each have a read port.
// A patch uses slot (patch mod 2) or (patch mod 4) of a region; the
// controller keeps the stages of the pipeline in different slots, so no
// address is read and written in the same cycle.
// Every port has one cycle read latency. The paper names the scratchpad but
// not its size or organisation; the regions, slot counts and port split are
// this design's choice.
module scratchpad
  import ficabu_pkg::*;
#(
  parameter int unsigned N_BATCH = 64,
  parameter int unsigned PATCH   = 256,
  parameter int unsigned GAW  = $clog2(2 * N_BATCH * PATCH),
  parameter int unsigned FAW  = $clog2(2 * PATCH),
  parameter int unsigned IAW  = $clog2(4 * PATCH),
  parameter int unsigned TIAW = $clog2(PATCH),
  parameter int unsigned TOAW = $clog2(PATCH / 2)
) (
  input  logic            clk,
  // GEMM engine: gradient writes
  input  logic            g_we,
  input  logic [GAW-1:0]  g_waddr,
  input  grad_t           g_wdata,
  // FIMD
  input  logic            fg_re,
  input  logic [GAW-1:0]  fg_raddr,
  output grad_t           fg_rdata,
  input  logic            ff_re,
  input  logic [FAW-1:0]  ff_raddr,
  output imp_t            ff_rdata,
  input  logic            ff_we,
  input  logic [FAW-1:0]  ff_waddr,
  input  logic [3:0]      ff_wbe,
  input  imp_t            ff_wdata,
  // Dampening
  input  logic            df_re,
  input  logic [FAW-1:0]  df_raddr,
  output imp_t            df_rdata,
  input  logic            di_re,
  input  logic [IAW-1:0]  di_raddr,
  output imp_t            di_rdata,
  input  logic            dt_re,
  input  logic [TIAW-1:0] dt_raddr,
  output logic [31:0]     dt_rdata,
  input  logic            dt_we,
  input  logic [TOAW-1:0] dt_waddr,
  input  logic [3:0]      dt_wbe,
  input  logic [31:0]     dt_wdata,
  // DMA
  input  logic            m_we,
  input  sp_region_e      m_wregion,
  input  logic [15:0]     m_waddr,
  input  logic [31:0]     m_wdata,
  input  logic            m_re,
  input  logic [15:0]     m_raddr,
  output logic [31:0]     m_rdata
);
  sp_ram #(.WIDTH(8), .DEPTH(2 * N_BATCH * PATCH), .AW(GAW)) u_grad (
    .clk, .re(fg_re), .raddr(fg_raddr), .rdata(fg_rdata),
    .we(g_we), .waddr(g_waddr), .wbe(1'b1), .wdata(g_wdata));

  sp_ram #(.WIDTH(32), .DEPTH(2 * PATCH), .AW(FAW)) u_idf_f (
    .clk, .re(ff_re), .raddr(ff_raddr), .rdata(ff_rdata),
    .we(ff_we), .waddr(ff_waddr), .wbe(ff_wbe), .wdata(ff_wdata));

  sp_ram #(.WIDTH(32), .DEPTH(2 * PATCH), .AW(FAW)) u_idf_d (
    .clk, .re(df_re), .raddr(df_raddr), .rdata(df_rdata),
    .we(ff_we), .waddr(ff_waddr), .wbe(ff_wbe), .wdata(ff_wdata));

  sp_ram #(.WIDTH(32), .DEPTH(4 * PATCH), .AW(IAW)) u_id (
    .clk, .re(di_re), .raddr(di_raddr), .rdata(di_rdata),
    .we(m_we && m_wregion == REG_ID), .waddr(m_waddr[IAW-1:0]), .wbe(4'hF), .wdata(m_wdata));

  sp_ram #(.WIDTH(32), .DEPTH(PATCH), .AW(TIAW)) u_tin (
    .clk, .re(dt_re), .raddr(dt_raddr), .rdata(dt_rdata),
    .we(m_we && m_wregion == REG_TIN), .waddr(m_waddr[TIAW-1:0]), .wbe(4'hF), .wdata(m_wdata));

  sp_ram #(.WIDTH(32), .DEPTH(PATCH / 2), .AW(TOAW)) u_tout (
    .clk, .re(m_re), .raddr(m_raddr[TOAW-1:0]), .rdata(m_rdata),
    .we(dt_we), .waddr(dt_waddr), .wbe(dt_wbe), .wdata(dt_wdata));
endmodule
