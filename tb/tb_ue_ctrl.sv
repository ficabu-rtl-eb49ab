// tb_ue_ctrl -- self-checking test of the engine controller.
// Small sizes (MAX_LAYERS = 8, N_BATCH = 2, PATCH = 16). GEMM, FIMD,
// Dampening and DMA are replaced by responders that report done after random
// delays, and a scoreboard checks the schedule the controller must keep:
//  - patches of a layer enter GEMM in order, with the right element count;
//  - FIMD starts patch p only after GEMM finished it, Dampening only after
//    FIMD finished it and both DMA loads of it completed, and the DMA store of
//    patch p only after Dampening finished it; each happens exactly once;
//  - scratchpad slot bases and DMA addresses follow the patch index;
//  - Dampening receives alpha and lambda scaled by the layer's S(l);
//  - layers run back end first, checkpoints wait for the host, A_forget > tau
//    continues, A_forget <= tau stops early and leaves later layers untouched,
//    a run without checkpoints edits all L layers.
// It also counts how often GEMM, FIMD and Dampening were busy at once.
module tb_ue_ctrl;
  import ficabu_pkg::*;
  localparam int ML = 8, N = 2, P = 16;
  localparam int GAW = $clog2(2*N*P), FAW = $clog2(2*P), IAW = $clog2(4*P), TIAW = $clog2(P), TOAW = $clog2(P/2);
  logic clk = 0, rst_n = 0;
  logic start, aforget_valid;
  logic [7:0] nlayers;
  logic [ML-1:0] cpmask;
  hp_t alpha, lambda;
  logic [15:0] tau, aforget;
  layer_cfg_t ltab [ML];
  logic busy, done_flag, cp_wait, stopped;
  logic [7:0] cur_layer, ldone;
  logic gemm_start, gemm_done, fimd_start, fimd_done, damp_start, damp_done, dma_start, dma_done;
  logic [7:0] gemm_layer;
  logic [15:0] gemm_patch, gemm_count, fimd_count, damp_count;
  logic [GAW-1:0] gemm_grad_base, fimd_grad_base;
  logic [FAW-1:0] fimd_idf_base, damp_idf_base;
  logic [IAW-1:0] damp_id_base;
  logic [TIAW-1:0] damp_tin_base;
  logic [TOAW-1:0] damp_tout_base;
  hp_t damp_alpha, damp_lambda;
  dma_cmd_t dma_cmd;

  int checks = 0, failures = 0, overlap3 = 0, cp_seen = 0;
  // scoreboard, per layer and patch
  bit g_done [ML][8], f_done [ML][8], d_done [ML][8], ld_t [ML][8], ld_i [ML][8], st_done [ML][8];
  int n_g [ML], n_f [ML], n_d [ML];
  int gd = -1, fd = -1, dd = -1, md = -1;
  int g_p, f_p, d_p, m_kind, m_p, lay;

  ue_ctrl #(.MAX_LAYERS(ML), .N_BATCH(N), .PATCH(P)) dut (.*);
  always #5 clk = ~clk;

  task automatic fail(string s);
    failures++; $display("FAIL %s", s);
  endtask
  function automatic int np_of(int l); return (int'(ltab[l].nparams) + P - 1) / P; endfunction
  function automatic int cnt_of(int l, int p);
    return (p == np_of(l) - 1) ? int'(ltab[l].nparams) - p*P : P;
  endfunction

  always @(posedge clk) if (rst_n) begin
    lay = int'(cur_layer);
    gemm_done <= 0; fimd_done <= 0; damp_done <= 0; dma_done <= 0;
    if (dut.pend_gemm && dut.pend_fimd && dut.pend_damp) overlap3++;
    // GEMM model
    if (gemm_start) begin
      checks += 3;
      if (int'(gemm_patch) != n_g[lay]) fail($sformatf("GEMM patch %0d, expected %0d", gemm_patch, n_g[lay]));
      if (int'(gemm_count) != cnt_of(lay, n_g[lay])) fail("GEMM count");
      if (int'(gemm_grad_base) != (n_g[lay] % 2) * N * P) fail("GEMM gradient slot");
      g_p = n_g[lay]; n_g[lay]++; gd = $urandom_range(3, 40);
    end else if (gd > 0) gd--;
    else if (gd == 0) begin gemm_done <= 1; g_done[lay][g_p] = 1; gd = -1; end
    // FIMD model
    if (fimd_start) begin
      f_p = n_f[lay]; n_f[lay]++;
      checks += 4;
      if (!g_done[lay][f_p]) fail($sformatf("FIMD started patch %0d before GEMM finished it", f_p));
      if (int'(fimd_count) != cnt_of(lay, f_p)) fail("FIMD count");
      if (int'(fimd_grad_base) != (f_p % 2) * N * P) fail("FIMD gradient slot");
      if (int'(fimd_idf_base) != (f_p % 2) * P) fail("FIMD I_Df slot");
      fd = $urandom_range(3, 40);
    end else if (fd > 0) fd--;
    else if (fd == 0) begin fimd_done <= 1; f_done[lay][f_p] = 1; fd = -1; end
    // Dampening model
    if (damp_start) begin
      d_p = n_d[lay]; n_d[lay]++;
      checks += 8;
      if (!f_done[lay][d_p]) fail($sformatf("Dampening started patch %0d before FIMD finished it", d_p));
      if (!ld_t[lay][d_p] || !ld_i[lay][d_p]) fail($sformatf("Dampening started patch %0d before its DMA loads", d_p));
      if (int'(damp_count) != cnt_of(lay, d_p)) fail("Dampening count");
      if (int'(damp_idf_base) != (d_p % 2) * P) fail("Dampening I_Df slot");
      if (int'(damp_id_base) != (d_p % 4) * P) fail("Dampening I_D slot");
      if (int'(damp_tin_base) != (d_p % 4) * P / 4) fail("Dampening theta-in slot");
      if (int'(damp_tout_base) != (d_p % 2) * P / 4) fail("Dampening theta-out slot");
      if (longint'(damp_alpha) != (longint'(alpha) * ltab[lay].scale) / 256 ||
          longint'(damp_lambda) != (longint'(lambda) * ltab[lay].scale) / 256) fail("S(l) scaling");
      dd = $urandom_range(3, 40);
    end else if (dd > 0) dd--;
    else if (dd == 0) begin damp_done <= 1; d_done[lay][d_p] = 1; dd = -1; end
    // DMA model
    if (dma_start) begin
      checks += 2;
      if (dma_cmd.to_sp && dma_cmd.region == REG_TIN) begin
        m_kind = 0; m_p = (int'(dma_cmd.mm_addr) - int'(ltab[lay].theta_addr)) / P;
        if (int'(dma_cmd.sp_addr) != (m_p % 4) * P / 4 || int'(dma_cmd.nwords) != (cnt_of(lay, m_p) + 3) / 4) fail("theta load command");
        if (ld_t[lay][m_p]) fail("theta loaded twice");
      end else if (dma_cmd.to_sp && dma_cmd.region == REG_ID) begin
        m_kind = 1; m_p = (int'(dma_cmd.mm_addr) - int'(ltab[lay].id_addr)) / (4*P);
        if (int'(dma_cmd.sp_addr) != (m_p % 4) * P || int'(dma_cmd.nwords) != cnt_of(lay, m_p)) fail("I_D load command");
        if (ld_i[lay][m_p]) fail("I_D loaded twice");
      end else begin
        m_kind = 2; m_p = (int'(dma_cmd.mm_addr) - int'(ltab[lay].theta_addr)) / P;
        if (int'(dma_cmd.sp_addr) != (m_p % 2) * P / 4 || int'(dma_cmd.nwords) != (cnt_of(lay, m_p) + 3) / 4) fail("theta store command");
        if (!d_done[lay][m_p]) fail($sformatf("theta of patch %0d stored before Dampening finished it", m_p));
      end
      md = $urandom_range(2, 15);
    end else if (md > 0) md--;
    else if (md == 0) begin
      dma_done <= 1; md = -1;
      case (m_kind) 0: ld_t[lay][m_p] = 1; 1: ld_i[lay][m_p] = 1; default: st_done[lay][m_p] = 1; endcase
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_sb();
    for (int l = 0; l < ML; l++) begin
      n_g[l] = 0; n_f[l] = 0; n_d[l] = 0;
      for (int p = 0; p < 8; p++) begin
        g_done[l][p] = 0; f_done[l][p] = 0; d_done[l][p] = 0; ld_t[l][p] = 0; ld_i[l][p] = 0; st_done[l][p] = 0;
      end
    end
  endtask

  // run and answer checkpoints with the listed accuracies
  task automatic run(int nl, logic [ML-1:0] cps, int acc [$], int exp_ldone, bit exp_stop);
    int k;
    clear_sb();
    nlayers = 8'(nl); cpmask = cps;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    k = 0;
    while (busy) begin
      if (cp_wait) begin
        cp_seen++;
        checks++;
        if (!cps[cur_layer]) fail("checkpoint at a layer outside C");
        repeat ($urandom_range(1, 10)) @(negedge clk);
        aforget = 16'(acc[k]); k++; aforget_valid = 1;
        @(negedge clk); aforget_valid = 0;
      end
      @(negedge clk);
    end
    checks += 3;
    if (!done_flag) fail("done flag not set");
    if (int'(ldone) != exp_ldone) fail($sformatf("layers done %0d expected %0d", ldone, exp_ldone));
    if (stopped != exp_stop) fail("early-stop flag");
    for (int l = 0; l < ML; l++) begin
      checks++;
      if (l < exp_ldone) begin
        for (int p = 0; p < np_of(l); p++) if (!st_done[l][p]) fail($sformatf("layer %0d patch %0d never stored", l, p));
        if (n_g[l] != np_of(l) || n_f[l] != np_of(l) || n_d[l] != np_of(l)) fail($sformatf("layer %0d stage counts", l));
      end else if (n_g[l] != 0 || n_f[l] != 0 || n_d[l] != 0) fail($sformatf("layer %0d touched after stop", l));
    end
  endtask

  initial begin
    start = 0; aforget_valid = 0; aforget = 0; tau = 16'd5; alpha = 24'd2560; lambda = 24'd256;
    nlayers = 1; cpmask = 0;
    for (int l = 0; l < ML; l++) ltab[l] = '{nparams: 32'(16 * (l % 3 + 1) + 8 * (l % 2)), theta_addr: 32'h1000 * (l + 1),
                                             id_addr: 32'h10_0000 + 32'h1000 * l, scale: 16'(256 + 300 * l)};
    ltab[1].nparams = 32'd100;  // 7 patches, last one of 4
    ltab[3].nparams = 32'd4;
    repeat (3) @(posedge clk); rst_n = 1;
    run(4, 8'b0000_1010, '{50, 3}, 4, 1);   // continue at layer 2, stop at layer 4
    run(5, 8'b0000_0001, '{2}, 1, 1);       // stop right after layer 1
    run(3, 8'b0000_0000, '{0}, 3, 0);       // no checkpoint: all layers
    run(6, 8'b0000_0100, '{90}, 6, 0);      // checkpoint that does not stop
    checks += 2;
    if (overlap3 == 0) fail("GEMM, FIMD and Dampening never busy together");
    if (cp_seen != 4) fail($sformatf("%0d checkpoints seen, expected 4", cp_seen));
    $display("three stages busy together in %0d cycles", overlap3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
