// tb_ficabu_top -- end-to-end test of the unlearning engine at full size.
//
// All parameters of ficabu_top keep their defaults (forget batch N = 64,
// 256-parameter patches, 32-entry layer table, 64 KB SRAM). The testbench
// plays the parts of the processor that sit outside the engine:
//  - a main memory holding theta (INT8, packed) and the stored global
//    importances I_D of four layers, with random ready and read latency;
//  - the GEMM accelerator: for each patch start it writes the N x count
//    per-sample gradients of that patch into the scratchpad, one per cycle,
//    from a fixed hash of (layer, parameter, sample); every fifth parameter
//    gets large "forget-class" gradients, the rest small ones;
//  - the host core: it programs the layer table (with S(l) = 1, 2, 10, 4),
//    alpha = 10, lambda = 1, tau = 5 and checkpoints at layers 2 and 3,
//    answers the first checkpoint with A_forget = 40 (continue) and the
//    second with A_forget = 2 (stop), and also uses the on-chip SRAM.
// At the end, theta of layers 1..3 must equal an SSD reference computed here
// (sum of squared gradients, selection I_Df > S*alpha*I_D, beta = min(S*lambda
// *I_D/I_Df, 1), round to nearest) and layer 4 must be untouched.
// Mechanisms counted, each must occur: early stop, checkpoint that continues,
// cycles with GEMM, FIMD and Dampening working on three patches at once,
// buffer swaps in FIMD and Dampening, selected and unselected parameters,
// a partial last patch, DMA loads and stores. The per-layer run time is
// checked against (P+3) slots of one GEMM patch window, i.e. FIMD and
// Dampening stay hidden behind GEMM.
module tb_ficabu_top;
  import ficabu_pkg::*;
  localparam int N = 64, P = 256, NL = 4;
  localparam int GAW = $clog2(2 * N * P);
  localparam int MEMW = 65536;                       // main memory words (256 KB)
  localparam int NPAR [NL] = '{1024, 300, 512, 256};
  localparam int SCL  [NL] = '{256, 512, 2560, 1024}; // S(l) in Q8.8
  localparam int ALPHA = 2560, LAMBDA = 256, TAU = 5;

  logic clk = 0, rst_n = 0;
  apb_req_t eng_apb_req, sram_apb_req;
  apb_rsp_t eng_apb_rsp, sram_apb_rsp;
  logic irq;
  mm_req_t mm_req;
  logic mm_ready, mm_rvalid;
  logic [31:0] mm_rdata;
  logic gemm_start, gemm_done, gemm_we;
  logic [7:0] gemm_layer;
  logic [15:0] gemm_patch, gemm_count;
  logic [GAW-1:0] gemm_grad_base, gemm_waddr;
  grad_t gemm_wdata;

  ficabu_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_overlap = 0, n_fswap = 0, n_dswap = 0, n_sel = 0, n_unsel = 0, n_partial = 0;
  int n_dma_ld = 0, n_dma_st = 0, n_cp_cont = 0, n_stop = 0;
  logic [31:0] mem [MEMW];
  logic [7:0]  theta0 [NL][1024];

  function automatic int theta_addr(int l); return 32'h1000 * (l + 1); endfunction   // bytes
  function automatic int id_addr(int l);    return 32'h10000 + 32'h1000 * l; endfunction

  // gradient of parameter i of layer l for forget sample n
  function automatic grad_t grad_of(int l, int i, int n);
    logic [31:0] x;
    x = 32'(l * 1000003) ^ 32'(i * 7919) ^ 32'(n * 104729);
    x = x * 32'd1103515245 + 32'd12345;
    x = x ^ (x >> 15);
    if (i % 5 == 0) return grad_t'($signed(x[7:0]) / 2 + ((x[8]) ? 8'sd40 : -8'sd40));
    return grad_t'($signed(x[10:8]) - 3'sd0);
  endfunction

  always @(posedge clk) cyc++;

  // ---------------- main memory ----------------
  int rd_delay = -1;
  logic [31:0] rd_addr;
  always_ff @(posedge clk) begin
    mm_rvalid <= 1'b0;
    if (rd_delay > 0) rd_delay <= rd_delay - 1;
    else if (rd_delay == 0) begin mm_rvalid <= 1'b1; mm_rdata <= mem[rd_addr[17:2]]; rd_delay <= -1; end
    if (mm_req.valid && mm_ready) begin
      if (mm_req.we) begin mem[mm_req.addr[17:2]] <= mm_req.wdata; n_dma_st++; end
      else begin rd_addr <= mm_req.addr; rd_delay <= $urandom_range(0, 2); n_dma_ld++; end
    end
    mm_ready <= ($urandom_range(0, 3) != 0);
  end

  // ---------------- GEMM accelerator model ----------------
  initial begin
    gemm_done = 0; gemm_we = 0; gemm_waddr = 0; gemm_wdata = 0;
    forever begin
      int l, p, c, base;
      @(posedge clk);
      if (gemm_start) begin
        l = int'(gemm_layer); p = int'(gemm_patch); c = int'(gemm_count); base = int'(gemm_grad_base);
        if (c != P) n_partial++;
        for (int n = 0; n < N; n++)
          for (int k = 0; k < c; k++) begin
            @(negedge clk);
            gemm_we = 1; gemm_waddr = GAW'(base + n * P + k); gemm_wdata = grad_of(l, p * P + k, n);
          end
        @(negedge clk); gemm_we = 0; gemm_done = 1;
        @(negedge clk); gemm_done = 0;
      end
    end
  end

  // ---------------- mechanism monitors ----------------
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.pend_gemm && dut.u_ctrl.pend_fimd && dut.u_ctrl.pend_damp) n_overlap++;
    if (dut.u_fimd.s3_v && dut.u_fimd.u_buf.close_fill) n_fswap++;
    if (dut.u_damp.s4_v && dut.u_damp.u_buf.close_fill) n_dswap++;
  end

  // ---------------- APB host ----------------
  task automatic apb(ref apb_req_t rq, ref apb_rsp_t rs, input logic wr, input logic [31:0] a,
                     input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); rq = '{psel: 1, penable: 0, pwrite: wr, paddr: a, pwdata: d, pstrb: 4'hF};
    @(negedge clk); rq.penable = 1;
    while (!rs.pready) @(negedge clk);
    r = rs.prdata;
    @(posedge clk); #1 rq = '0;
  endtask
  task automatic wr_eng(logic [11:0] a, logic [31:0] d);
    logic [31:0] r; apb(eng_apb_req, eng_apb_rsp, 1, 32'(a), d, r);
  endtask
  task automatic rd_eng(logic [11:0] a, output logic [31:0] r);
    apb(eng_apb_req, eng_apb_rsp, 0, 32'(a), 0, r);
  endtask
  task automatic fail(string s); failures++; $display("FAIL %s", s); endtask

  // ---------------- SSD reference ----------------
  function automatic logic [7:0] ref_theta(int l, int i);
    longint unsigned idf, id, a, lam, beta;
    int th;
    idf = 0;
    for (int n = 0; n < N; n++) idf += longint'(int'(grad_of(l, i, n)) * int'(grad_of(l, i, n)));
    id  = mem[(id_addr(l) >> 2) + i];   // I_D is never written back
    a   = (longint'(ALPHA) * SCL[l]) / 256;
    lam = (longint'(LAMBDA) * SCL[l]) / 256;
    th  = int'($signed(theta0[l][i]));
    if (!(idf * 256 > a * id)) begin n_unsel++; return 8'(th); end
    n_sel++;
    beta = (lam * id >= idf * 256) ? 256 : (lam * id) / idf;
    return 8'(int'($floor(real'(th) * real'(beta) / 256.0 + 0.5)));
  endfunction

  initial begin
    #(64'd10 * 64'd2_000_000);
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r, st;
    int t0, t_layer_start, cps, prev_l;
    eng_apb_req = '0; sram_apb_req = '0;
    for (int i = 0; i < MEMW; i++) mem[i] = 32'h0;
    for (int l = 0; l < NL; l++)
      for (int i = 0; i < NPAR[l]; i++) begin
        theta0[l][i] = 8'($urandom());
        mem[(theta_addr(l) >> 2) + i / 4][8 * (i % 4) +: 8] = theta0[l][i];
        mem[(id_addr(l) >> 2) + i] = $urandom_range(1, 2000);
      end
    repeat (5) @(posedge clk); rst_n = 1;

    // host uses the on-chip SRAM
    for (int i = 0; i < 16; i++) begin logic [31:0] d; d = 32'hC0DE_0000 + i; apb(sram_apb_req, sram_apb_rsp, 1, 32'(i * 4), d, r); end
    for (int i = 0; i < 16; i++) begin
      apb(sram_apb_req, sram_apb_rsp, 0, 32'(i * 4), 0, r);
      checks++; if (r != 32'hC0DE_0000 + i) fail("on-chip SRAM readback");
    end

    // program the engine
    for (int l = 0; l < NL; l++) begin
      wr_eng(R_LTAB + 12'(16 * l) + 12'h0, 32'(NPAR[l]));
      wr_eng(R_LTAB + 12'(16 * l) + 12'h4, 32'(theta_addr(l)));
      wr_eng(R_LTAB + 12'(16 * l) + 12'h8, 32'(id_addr(l)));
      wr_eng(R_LTAB + 12'(16 * l) + 12'hC, 32'(SCL[l]));
    end
    wr_eng(R_NLAYERS, NL); wr_eng(R_CPMASK, 32'b0110);
    wr_eng(R_ALPHA, ALPHA); wr_eng(R_LAMBDA, LAMBDA); wr_eng(R_TAU, TAU);
    t0 = cyc; t_layer_start = cyc; cps = 0; prev_l = -1;
    wr_eng(R_CTRL, 1);

    // follow the run
    forever begin
      rd_eng(R_STATUS, st);
      if (st[2]) begin
        // checkpoint: partial inference on the host/GEMM side gives A_forget
        int l;
        l = int'(st[15:8]);
        checks++;
        begin
          int bound;
          bound = 0;
          for (int j = prev_l + 1; j <= l; j++) bound += ((NPAR[j] + P - 1) / P + 3) * (N * P + 300);
          if (cyc - t_layer_start > bound)
            fail($sformatf("layers %0d..%0d took %0d cycles, bound %0d", prev_l + 2, l + 1, cyc - t_layer_start, bound));
          $display("layers %0d..%0d: %0d cycles (bound %0d)", prev_l + 2, l + 1, cyc - t_layer_start, bound);
        end
        prev_l = l;
        wr_eng(R_AFORGET, (cps == 0) ? 40 : 2);
        if (cps == 0) n_cp_cont++;
        cps++;
        t_layer_start = cyc;
      end
      if (st[1] && !st[0]) break;
    end
    rd_eng(R_LDONE, r);
    checks += 2;
    if (r != 3) fail($sformatf("layers done = %0d, expected 3", r));
    if (!st[3]) fail("early-stop flag not set"); else n_stop++;
    $display("run took %0d cycles", cyc - t0);

    // check theta
    for (int l = 0; l < NL; l++)
      for (int i = 0; i < NPAR[l]; i++) begin
        logic [7:0] got, exp;
        got = mem[(theta_addr(l) >> 2) + i / 4][8 * (i % 4) +: 8];
        exp = (l < 3) ? ref_theta(l, i) : theta0[l][i];
        checks++;
        if (got != exp) begin
          fail($sformatf("layer %0d theta[%0d] = %0d expected %0d", l + 1, i, $signed(got), $signed(exp)));
          if (failures > 20) break;
        end
      end

    $display("mechanisms: early_stop=%0d checkpoint_continue=%0d three_stage_overlap_cycles=%0d fimd_buffer_swaps=%0d damp_buffer_swaps=%0d selected=%0d unselected=%0d partial_patches=%0d dma_loads=%0d dma_stores=%0d",
             n_stop, n_cp_cont, n_overlap, n_fswap, n_dswap, n_sel, n_unsel, n_partial, n_dma_ld, n_dma_st);
    checks += 10;
    if (n_stop == 0)    fail("early stop never happened");
    if (n_cp_cont == 0) fail("no checkpoint continued");
    if (n_overlap == 0) fail("pipeline stages never overlapped");
    if (n_fswap == 0)   fail("FIMD buffers never swapped");
    if (n_dswap == 0)   fail("Dampening buffers never swapped");
    if (n_sel == 0)     fail("no parameter selected");
    if (n_unsel == 0)   fail("every parameter selected");
    if (n_partial == 0) fail("no partial patch");
    if (n_dma_ld == 0)  fail("no DMA load");
    if (n_dma_st == 0)  fail("no DMA store");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
