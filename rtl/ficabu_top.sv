// ficabu_top -- FiCABU unlearning engine with its DMA and the on-chip SRAM.
//
// This is the part of the FiCABU edge processor that the design adds to a
// RISC-V system: the Unlearning Engine (scratchpad, FIMD unit, Dampening unit,
// controller and its APB registers), the custom DMA that moves parameters
// and global importances between main memory and the scratchpad, and the
// 64 KB on-chip SRAM. The parts of the processor that come from elsewhere are
// outside and reached through ports: the host core and system interconnect
// drive the two APB ports, the DDR controller serves the DMA's main-memory
// port, and the GEMM accelerator receives a start per patch (layer, patch,
// element count, gradient slot), writes N_BATCH*count INT8 gradients into the
// scratchpad gradient region (sample-major, grad_base + n*PATCH + k) and
// pulses gemm_done.
//
// Data flow per patch: DMA loads theta and I_D -> GEMM writes gradients ->
// FIMD computes I_Df -> Dampening edits theta -> DMA stores theta, with the
// stages of consecutive patches overlapped (see ue_ctrl). irq is high while
// a checkpoint waits for the host's forget accuracy or a run has finished.
//
// What follows the paper: the blocks and their connections (engine on an APB
// port, DMA between main memory and scratchpad, SRAM on APB, GEMM -> FIMD ->
// Dampening patch pipeline). This design's own choices: the simplified
// main-memory port instead of AXI, the GEMM handshake, and having the DMA
// inside this top, where the processor shows it beside the engine.
// Some output bits are constant by construction:
//   - pslverr is never raised;
//   - the engine port never waits;
//   - main-memory addresses are word aligned;
//   - gradient slot bases are multiples of N_BATCH*PATCH.
// The units' busy flags and the selected-parameter count are not used at
// this level: the controller tracks progress through the done pulses.
module ficabu_top
  import ficabu_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 32,
  parameter int unsigned N_BATCH    = 64,
  parameter int unsigned PATCH      = 256,
  parameter int unsigned BUF_DEPTH  = 16,
  parameter int unsigned SRAM_BYTES = 65536,
  parameter int unsigned GAW  = $clog2(2 * N_BATCH * PATCH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // host side
  input  apb_req_t    eng_apb_req,
  output apb_rsp_t    eng_apb_rsp,
  input  apb_req_t    sram_apb_req,
  output apb_rsp_t    sram_apb_rsp,
  output logic        irq,
  // main memory (through the system interconnect)
  output mm_req_t     mm_req,
  input  logic        mm_ready,
  input  logic        mm_rvalid,
  input  logic [31:0] mm_rdata,
  // GEMM accelerator
  output logic        gemm_start,
  output logic [7:0]  gemm_layer,
  output logic [15:0] gemm_patch,
  output logic [15:0] gemm_count,
  output logic [GAW-1:0] gemm_grad_base,
  input  logic        gemm_done,
  input  logic        gemm_we,
  input  logic [GAW-1:0] gemm_waddr,
  input  grad_t       gemm_wdata
);
  localparam int unsigned FAW  = $clog2(2 * PATCH);
  localparam int unsigned IAW  = $clog2(4 * PATCH);
  localparam int unsigned TIAW = $clog2(PATCH);
  localparam int unsigned TOAW = $clog2(PATCH / 2);

  // ---------------- registers <-> controller ----------------
  logic        start, aforget_valid;
  logic [7:0]  nlayers, cur_layer, ldone;
  logic [MAX_LAYERS-1:0] cpmask;
  hp_t         alpha, lambda;
  logic [15:0] tau, aforget;
  layer_cfg_t  ltab [MAX_LAYERS];
  logic        busy, done_flag, cp_wait, stopped;

  ue_regs #(.MAX_LAYERS(MAX_LAYERS)) u_regs (
    .clk, .rst_n, .apb_req(eng_apb_req), .apb_rsp(eng_apb_rsp),
    .start, .nlayers, .cpmask, .alpha, .lambda, .tau, .aforget_valid, .aforget, .ltab,
    .st_busy(busy), .st_done(done_flag), .st_cp_wait(cp_wait), .st_stopped(stopped),
    .st_layer(cur_layer), .st_ldone(ldone));

  // ---------------- controller ----------------
  logic            fimd_start, fimd_done, damp_start, damp_done, dma_start, dma_done;
  logic [15:0]     fimd_count, damp_count;
  logic [GAW-1:0]  fimd_grad_base;
  logic [FAW-1:0]  fimd_idf_base, damp_idf_base;
  logic [IAW-1:0]  damp_id_base;
  logic [TIAW-1:0] damp_tin_base;
  logic [TOAW-1:0] damp_tout_base;
  hp_t             damp_alpha, damp_lambda;
  dma_cmd_t        dma_cmd;

  ue_ctrl #(.MAX_LAYERS(MAX_LAYERS), .N_BATCH(N_BATCH), .PATCH(PATCH),
            .GAW(GAW), .FAW(FAW), .IAW(IAW), .TIAW(TIAW), .TOAW(TOAW)) u_ctrl (
    .clk, .rst_n,
    .start, .nlayers, .cpmask, .alpha, .lambda, .tau, .aforget_valid, .aforget, .ltab,
    .busy, .done_flag, .cp_wait, .stopped, .cur_layer, .ldone,
    .gemm_start, .gemm_layer, .gemm_patch, .gemm_count, .gemm_grad_base, .gemm_done,
    .fimd_start, .fimd_count, .fimd_grad_base, .fimd_idf_base, .fimd_done,
    .damp_start, .damp_count, .damp_alpha, .damp_lambda, .damp_idf_base, .damp_id_base,
    .damp_tin_base, .damp_tout_base, .damp_done,
    .dma_start, .dma_cmd, .dma_done);

  assign irq = cp_wait || done_flag;

  // ---------------- scratchpad ports ----------------
  logic            fg_re, ff_re, ff_we, df_re, di_re, dt_re, dt_we, m_we, m_re;
  logic [GAW-1:0]  fg_raddr;
  grad_t           fg_rdata;
  logic [FAW-1:0]  ff_raddr, ff_waddr, df_raddr;
  imp_t            ff_rdata, ff_wdata, df_rdata, di_rdata;
  logic [3:0]      ff_wbe, dt_wbe;
  logic [IAW-1:0]  di_raddr;
  logic [TIAW-1:0] dt_raddr;
  logic [TOAW-1:0] dt_waddr;
  logic [31:0]     dt_rdata, dt_wdata, m_wdata, m_rdata;
  sp_region_e      m_wregion;
  logic [15:0]     m_waddr, m_raddr;
  logic            fimd_busy, damp_busy, dma_busy;
  logic [15:0]     sel_count;

  fimd #(.N_BATCH(N_BATCH), .PATCH(PATCH), .GAW(GAW), .FAW(FAW), .BUF_DEPTH(BUF_DEPTH)) u_fimd (
    .clk, .rst_n, .start(fimd_start), .count(fimd_count), .grad_base(fimd_grad_base),
    .idf_base(fimd_idf_base), .accumulate(1'b0), .busy(fimd_busy), .done(fimd_done),
    .g_re(fg_re), .g_raddr(fg_raddr), .g_rdata(fg_rdata),
    .f_re(ff_re), .f_raddr(ff_raddr), .f_rdata(ff_rdata),
    .f_we(ff_we), .f_waddr(ff_waddr), .f_wbe(ff_wbe), .f_wdata(ff_wdata));

  dampening #(.PATCH(PATCH), .FAW(FAW), .IAW(IAW), .TIAW(TIAW), .TOAW(TOAW),
              .BUF_DEPTH(BUF_DEPTH)) u_damp (
    .clk, .rst_n, .start(damp_start), .count(damp_count), .alpha(damp_alpha), .lambda(damp_lambda),
    .idf_base(damp_idf_base), .id_base(damp_id_base), .tin_base(damp_tin_base),
    .tout_base(damp_tout_base), .busy(damp_busy), .done(damp_done), .sel_count(sel_count),
    .f_re(df_re), .f_raddr(df_raddr), .f_rdata(df_rdata),
    .i_re(di_re), .i_raddr(di_raddr), .i_rdata(di_rdata),
    .t_re(dt_re), .t_raddr(dt_raddr), .t_rdata(dt_rdata),
    .t_we(dt_we), .t_waddr(dt_waddr), .t_wbe(dt_wbe), .t_wdata(dt_wdata));

  dma u_dma (
    .clk, .rst_n, .start(dma_start), .cmd(dma_cmd), .busy(dma_busy), .done(dma_done),
    .mm_req, .mm_ready, .mm_rvalid, .mm_rdata,
    .sp_we(m_we), .sp_wregion(m_wregion), .sp_waddr(m_waddr), .sp_wdata(m_wdata),
    .sp_re(m_re), .sp_raddr(m_raddr), .sp_rdata(m_rdata));

  scratchpad #(.N_BATCH(N_BATCH), .PATCH(PATCH), .GAW(GAW), .FAW(FAW), .IAW(IAW),
               .TIAW(TIAW), .TOAW(TOAW)) u_sp (
    .clk,
    .g_we(gemm_we), .g_waddr(gemm_waddr), .g_wdata(gemm_wdata),
    .fg_re, .fg_raddr, .fg_rdata,
    .ff_re, .ff_raddr, .ff_rdata, .ff_we, .ff_waddr, .ff_wbe, .ff_wdata,
    .df_re, .df_raddr, .df_rdata, .di_re, .di_raddr, .di_rdata,
    .dt_re, .dt_raddr, .dt_rdata, .dt_we, .dt_waddr, .dt_wbe, .dt_wdata,
    .m_we, .m_wregion, .m_waddr, .m_wdata, .m_re, .m_raddr, .m_rdata);

  // ---------------- on-chip SRAM ----------------
  onchip_sram #(.SIZE_BYTES(SRAM_BYTES)) u_sram (
    .clk, .rst_n, .apb_req(sram_apb_req), .apb_rsp(sram_apb_rsp));
endmodule
