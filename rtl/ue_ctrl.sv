// ue_ctrl -- sequencer of the unlearning engine (Context-Adaptive Unlearning
// with the patch-level GEMM -> FIMD -> Dampening pipeline).
//
// A run edits layers from the back end (l = 1, next to the classifier) toward
// the front end (l = L). Each layer is cut into patches of PATCH parameters
// and processed as a three-stage pipeline advanced in lock-step slots: in
// slot t the GEMM engine produces the gradients of patch t, FIMD turns the
// gradients of patch t-1 into I_Df, and Dampening edits patch t-2. In the
// same slot the DMA loads theta and I_D of patch t and stores the edited
// theta of patch t-3. A slot ends when every unit started in it has reported
// done, so a layer of P patches takes P+3 slots, each as long as its slowest
// stage. Operands of neighbouring patches sit in different scratchpad slots
// (patch mod 2 or mod 4).
// After a layer whose bit is set in the checkpoint set, the controller raises
// cp_wait and waits for the host, which runs partial inference from the
// cached activations on the GEMM engine and writes the resulting forget
// accuracy A_forget. If A_forget <= tau the run stops early and the remaining
// front-end layers stay untouched; otherwise the next layer follows. The run
// also ends after layer L. alpha and lambda reach Dampening scaled by the
// layer's S(l) (depth_scale).
// The back-end-first order, the checkpoint test and the GEMM -> FIMD ->
// Dampening stage order follow the paper; the slot rule, the DMA schedule
// and the host handshake for the checkpoint are this design's choice.
// Layer parameter counts must be multiples of 4 (theta is moved in 32-bit
// words of four INT8).
module ue_ctrl
  import ficabu_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 32,
  parameter int unsigned N_BATCH    = 64,
  parameter int unsigned PATCH      = 256,
  parameter int unsigned GAW  = $clog2(2 * N_BATCH * PATCH),
  parameter int unsigned FAW  = $clog2(2 * PATCH),
  parameter int unsigned IAW  = $clog2(4 * PATCH),
  parameter int unsigned TIAW = $clog2(PATCH),
  parameter int unsigned TOAW = $clog2(PATCH / 2)
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration (ue_regs)
  input  logic        start,
  input  logic [7:0]  nlayers,
  input  logic [MAX_LAYERS-1:0] cpmask,
  input  hp_t         alpha,
  input  hp_t         lambda,
  input  logic [15:0] tau,
  input  logic        aforget_valid,
  input  logic [15:0] aforget,
  input  layer_cfg_t  ltab [MAX_LAYERS],
  // status
  output logic        busy,
  output logic        done_flag,
  output logic        cp_wait,
  output logic        stopped,
  output logic [7:0]  cur_layer,
  output logic [7:0]  ldone,
  // GEMM engine
  output logic        gemm_start,
  output logic [7:0]  gemm_layer,
  output logic [15:0] gemm_patch,
  output logic [15:0] gemm_count,
  output logic [GAW-1:0] gemm_grad_base,
  input  logic        gemm_done,
  // FIMD
  output logic        fimd_start,
  output logic [15:0] fimd_count,
  output logic [GAW-1:0] fimd_grad_base,
  output logic [FAW-1:0] fimd_idf_base,
  input  logic        fimd_done,
  // Dampening
  output logic        damp_start,
  output logic [15:0] damp_count,
  output hp_t         damp_alpha,
  output hp_t         damp_lambda,
  output logic [FAW-1:0]  damp_idf_base,
  output logic [IAW-1:0]  damp_id_base,
  output logic [TIAW-1:0] damp_tin_base,
  output logic [TOAW-1:0] damp_tout_base,
  input  logic        damp_done,
  // DMA
  output logic        dma_start,
  output dma_cmd_t    dma_cmd,
  input  logic        dma_done
);
  localparam int unsigned PSH = $clog2(PATCH);
  localparam int unsigned LW  = $clog2(MAX_LAYERS);

  typedef enum logic [2:0] {C_IDLE, C_LAYER, C_SLOT, C_WAIT, C_CP} state_e;
  state_e state;

  logic [LW-1:0] l;
  logic [15:0]   t, np;
  logic          pend_gemm, pend_fimd, pend_damp, dma_active;
  logic [2:0]    dma_q;    // bit0 load theta, bit1 load I_D, bit2 store theta

  layer_cfg_t lc;
  assign lc = ltab[l];

  wire [15:0] np_calc = 16'((lc.nparams + 32'(PATCH - 1)) >> PSH);
  wire [15:0] t1 = t - 16'd1;
  wire [15:0] t2 = t - 16'd2;
  wire [15:0] t3 = t - 16'd3;

  function automatic logic [15:0] cnt_of(logic [15:0] p, logic [15:0] npat, logic [31:0] nparams);
    return (p == npat - 16'd1) ? 16'(nparams - (32'(p) << PSH)) : 16'(PATCH);
  endfunction

  // ---------------- Balanced Dampening: S(l) * (alpha, lambda) ----------------
  depth_scale u_scale (.alpha(alpha), .lambda(lambda), .scale(lc.scale),
                       .alpha_s(damp_alpha), .lambda_s(damp_lambda));

  // ---------------- per-stage operands of the current slot ----------------
  assign gemm_layer     = 8'(l);
  assign gemm_patch     = t;
  assign gemm_count     = cnt_of(t, np, lc.nparams);
  assign gemm_grad_base = GAW'(32'(t[0]) * N_BATCH * PATCH);

  assign fimd_count     = cnt_of(t1, np, lc.nparams);
  assign fimd_grad_base = GAW'(32'(t1[0]) * N_BATCH * PATCH);
  assign fimd_idf_base  = FAW'(32'(t1[0]) * PATCH);

  assign damp_count     = cnt_of(t2, np, lc.nparams);
  assign damp_idf_base  = FAW'(32'(t2[0]) * PATCH);
  assign damp_id_base   = IAW'(32'(t2[1:0]) * PATCH);
  assign damp_tin_base  = TIAW'(32'(t2[1:0]) * PATCH / 4);
  assign damp_tout_base = TOAW'(32'(t2[0]) * PATCH / 4);

  function automatic dma_cmd_t dma_cmd_of(logic [2:0] q, logic [15:0] tt, logic [15:0] tt3,
                                          logic [15:0] npat, layer_cfg_t c);
    dma_cmd_t d;
    d = '0;
    if (q[0]) begin            // theta of patch t -> theta-in slot t mod 4
      d.to_sp   = 1'b1;
      d.region  = REG_TIN;
      d.mm_addr = c.theta_addr + (32'(tt) << PSH);
      d.sp_addr = 16'(32'(tt[1:0]) * PATCH / 4);
      d.nwords  = (cnt_of(tt, npat, c.nparams) + 16'd3) >> 2;
    end else if (q[1]) begin   // I_D of patch t -> I_D slot t mod 4
      d.to_sp   = 1'b1;
      d.region  = REG_ID;
      d.mm_addr = c.id_addr + (32'(tt) << (PSH + 2));
      d.sp_addr = 16'(32'(tt[1:0]) * PATCH);
      d.nwords  = cnt_of(tt, npat, c.nparams);
    end else begin             // edited theta of patch t-3 -> main memory
      d.to_sp   = 1'b0;
      d.region  = REG_TOUT;
      d.mm_addr = c.theta_addr + (32'(tt3) << PSH);
      d.sp_addr = 16'(32'(tt3[0]) * PATCH / 4);
      d.nwords  = (cnt_of(tt3, npat, c.nparams) + 16'd3) >> 2;
    end
    return d;
  endfunction

  wire slot_idle = !pend_gemm && !pend_fimd && !pend_damp && !dma_active && (dma_q == '0);
  wire last_layer = (8'(l) + 8'd1 >= nlayers) || (32'(l) + 1 >= MAX_LAYERS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; l <= '0; t <= '0; np <= '0;
      pend_gemm <= 1'b0; pend_fimd <= 1'b0; pend_damp <= 1'b0; dma_active <= 1'b0; dma_q <= '0;
      gemm_start <= 1'b0; fimd_start <= 1'b0; damp_start <= 1'b0; dma_start <= 1'b0; dma_cmd <= '0;
      done_flag <= 1'b0; stopped <= 1'b0; ldone <= '0;
    end else begin
      gemm_start <= 1'b0; fimd_start <= 1'b0; damp_start <= 1'b0; dma_start <= 1'b0;
      if (gemm_done) pend_gemm <= 1'b0;
      if (fimd_done) pend_fimd <= 1'b0;
      if (damp_done) pend_damp <= 1'b0;
      if (dma_done)  dma_active <= 1'b0;

      unique case (state)
        C_IDLE: if (start) begin
          l <= '0; done_flag <= 1'b0; stopped <= 1'b0; ldone <= '0;
          state <= C_LAYER;
        end

        C_LAYER: begin
          np    <= np_calc;
          t     <= '0;
          state <= C_SLOT;
        end

        C_SLOT: begin
          if (t > np + 16'd2) begin
            // layer finished (also taken at once for an empty layer)
            if (cpmask[l]) state <= C_CP;
            else if (last_layer) begin
              state <= C_IDLE; done_flag <= 1'b1; ldone <= 8'(l) + 8'd1;
            end else begin
              l <= l + 1'b1; state <= C_LAYER;
            end
          end else begin
            gemm_start <= (t < np);
            fimd_start <= (t >= 16'd1) && (t1 < np);
            damp_start <= (t >= 16'd2) && (t2 < np);
            pend_gemm  <= (t < np);
            pend_fimd  <= (t >= 16'd1) && (t1 < np);
            pend_damp  <= (t >= 16'd2) && (t2 < np);
            dma_q      <= {(t >= 16'd3) && (t3 < np), (t < np), (t < np)};
            state      <= C_WAIT;
          end
        end

        C_WAIT: begin
          if (!dma_active && !dma_start && dma_q != '0) begin
            dma_start  <= 1'b1;
            dma_active <= 1'b1;
            dma_cmd    <= dma_cmd_of(dma_q, t, t3, np, lc);
            if (dma_q[0])      dma_q[0] <= 1'b0;
            else if (dma_q[1]) dma_q[1] <= 1'b0;
            else               dma_q[2] <= 1'b0;
          end else if (slot_idle && !gemm_start && !fimd_start && !damp_start && !dma_start) begin
            t     <= t + 16'd1;
            state <= C_SLOT;
          end
        end

        C_CP: if (aforget_valid) begin
          if (aforget <= tau) begin
            stopped <= 1'b1; state <= C_IDLE; done_flag <= 1'b1; ldone <= 8'(l) + 8'd1;
          end else if (last_layer) begin
            state <= C_IDLE; done_flag <= 1'b1; ldone <= 8'(l) + 8'd1;
          end else begin
            l <= l + 1'b1; state <= C_LAYER;
          end
        end

        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy      = (state != C_IDLE);
  assign cp_wait   = (state == C_CP);
  assign cur_layer = 8'(l);

  a_np_mult4: assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_LAYER) |-> (lc.nparams[1:0] == 2'b00));
endmodule
