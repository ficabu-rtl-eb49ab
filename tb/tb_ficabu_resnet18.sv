// tb_ficabu_resnet18 -- workload test: forgetting one class of an INT8
// ResNet-18, run on the unlearning engine at its default size.
//
// The host programs the engine with the real ResNet-18 layer table, ordered
// from the back end: l = 1 is the fully connected classifier (512 x C),
// l = 2..20 are the convolutions of stages 4 down to 1 (downsampling 1x1
// convolutions included), and l = 21 is the stem convolution (7x7x3x64).
// Checkpoints sit at the first and last layer and after every fourth layer
// in between. Two cases are run one after the other, differing only in size:
//   - face recognition with C = 105 identities (53,760 classifier weights);
//   - CIFAR-20 with C = 20 classes (10,240 classifier weights).
// In both, the host's partial inference after the classifier reports a
// forget accuracy at the target, so the engine stops after layer 1 and never
// touches the front-end layers. This is the case where the early stop gives
// almost all of its savings. Only layer 1 is placed in the main-memory model.
// The testbench fails if the DMA touches any other address.
//
// The GEMM model writes per-sample gradients for each patch. Weights in the
// forgotten class's row get large gradients, all others small ones. At the
// end, every classifier weight must equal an SSD reference computed here. The
// test also checks the following:
//   - the layer's time is within (P+3) GEMM patch windows;
//   - GEMM was asked only for layer-1 patches;
//   - LDONE = 1, and the early-stop flag is set.
// Main memory is sparse: an associative array of 32-bit words.
module tb_ficabu_resnet18;
  import ficabu_pkg::*;
  localparam int N = 64, P = 256, NL = 21;
  localparam int GAW = $clog2(2 * N * P);
  localparam int ALPHA = 2560, LAMBDA = 256, TAU = 5;   // alpha 10, lambda 1 (Q16.8)
  localparam int CF = 3;                                 // forgotten class / identity

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

  int checks = 0, failures = 0, cyc = 0;
  int n_sel = 0, n_unsel = 0, n_bad_addr = 0, n_bad_layer = 0, n_dma_ld = 0, n_dma_st = 0;
  logic [31:0] mem [int unsigned];
  int nparams [NL];
  int unsigned theta_base [NL], id_base [NL];
  int cur_classes;

  always @(posedge clk) cyc++;

  // ResNet-18 weight counts from the back end; C classes in the classifier.
  task automatic make_table(int classes);
    int convs [19] = '{512*512*9, 512*512*9, 512*512*9, 256*512, 256*512*9,
                       256*256*9, 256*256*9, 256*256*9, 128*256, 128*256*9,
                       128*128*9, 128*128*9, 128*128*9, 64*128, 64*128*9,
                       64*64*9, 64*64*9, 64*64*9, 64*64*9};
    int unsigned tb_acc, id_acc;
    nparams[0] = 512 * classes;
    for (int l = 1; l < 20; l++) nparams[l] = convs[l - 1];
    nparams[20] = 3 * 64 * 49;
    tb_acc = 32'h0100_0000; id_acc = 32'h4000_0000;
    for (int l = 0; l < NL; l++) begin
      theta_base[l] = tb_acc; id_base[l] = id_acc;
      tb_acc += 32'(nparams[l]); id_acc += 32'(4 * nparams[l]);
    end
  endtask

  // S(l) = 1 + 9 (sig(l) - sig(1)) / (sig(L) - sig(1)), c_m = 11, in Q8.8
  function automatic int scale_q88(int l1);
    real s1, sl, sL;
    s1 = 1.0 / (1.0 + $exp(-(1.0 - 11.0)));
    sL = 1.0 / (1.0 + $exp(-(real'(NL) - 11.0)));
    sl = 1.0 / (1.0 + $exp(-(real'(l1) - 11.0)));
    return int'($floor((1.0 + 9.0 * (sl - s1) / (sL - s1)) * 256.0 + 0.5));
  endfunction

  // gradient of classifier weight i (row i / 512 = class) for forget sample n
  function automatic grad_t grad_of(int i, int n);
    logic [31:0] x;
    x = 32'(cur_classes * 977) ^ 32'(i * 7919) ^ 32'(n * 104729);
    x = x * 32'd1103515245 + 32'd12345;
    x = x ^ (x >> 15);
    if (i / 512 == CF) return grad_t'($signed(x[7:0]) / 2 + ((x[8]) ? 8'sd40 : -8'sd40));
    return grad_t'($signed(x[10:8]));
  endfunction

  // ---------------- main memory (only layer 1 is present) ----------------
  function automatic bit in_layer1(int unsigned a);
    return (a >= theta_base[0] && a < theta_base[0] + 32'(nparams[0])) ||
           (a >= id_base[0] && a < id_base[0] + 32'(4 * nparams[0]));
  endfunction
  int rd_delay = -1;
  logic [31:0] rd_addr;
  always @(posedge clk) begin
    mm_rvalid <= 1'b0;
    if (rd_delay > 0) rd_delay <= rd_delay - 1;
    else if (rd_delay == 0) begin
      mm_rvalid <= 1'b1;
      mm_rdata  <= mem.exists(rd_addr >> 2) ? mem[rd_addr >> 2] : 32'h0;
      rd_delay  <= -1;
    end
    if (mm_req.valid && mm_ready) begin
      if (!in_layer1(mm_req.addr)) n_bad_addr++;
      if (mm_req.we) begin mem[mm_req.addr >> 2] = mm_req.wdata; n_dma_st++; end
      else begin rd_addr <= mm_req.addr; rd_delay <= $urandom_range(0, 2); n_dma_ld++; end
    end
    mm_ready <= ($urandom_range(0, 3) != 0);
  end

  // ---------------- GEMM accelerator model ----------------
  initial begin
    gemm_done = 0; gemm_we = 0; gemm_waddr = 0; gemm_wdata = 0;
    forever begin
      int p, c, base;
      @(posedge clk);
      if (gemm_start) begin
        if (gemm_layer != 8'd0) n_bad_layer++;
        p = int'(gemm_patch); c = int'(gemm_count); base = int'(gemm_grad_base);
        for (int n = 0; n < N; n++)
          for (int k = 0; k < c; k++) begin
            @(negedge clk);
            gemm_we = 1; gemm_waddr = GAW'(base + n * P + k); gemm_wdata = grad_of(p * P + k, n);
          end
        @(negedge clk); gemm_we = 0; gemm_done = 1;
        @(negedge clk); gemm_done = 0;
      end
    end
  end

  // ---------------- APB host ----------------
  task automatic wr_eng(logic [11:0] a, logic [31:0] d);
    @(negedge clk); eng_apb_req = '{psel: 1, penable: 0, pwrite: 1, paddr: 32'(a), pwdata: d, pstrb: 4'hF};
    @(negedge clk); eng_apb_req.penable = 1;
    while (!eng_apb_rsp.pready) @(negedge clk);
    @(posedge clk); #1 eng_apb_req = '0;
  endtask
  task automatic rd_eng(logic [11:0] a, output logic [31:0] r);
    @(negedge clk); eng_apb_req = '{psel: 1, penable: 0, pwrite: 0, paddr: 32'(a), pwdata: 0, pstrb: 0};
    @(negedge clk); eng_apb_req.penable = 1;
    while (!eng_apb_rsp.pready) @(negedge clk);
    r = eng_apb_rsp.prdata;
    @(posedge clk); #1 eng_apb_req = '0;
  endtask
  task automatic fail(string s); failures++; $display("FAIL %s", s); endtask

  // ---------------- SSD reference for the classifier ----------------
  function automatic logic [7:0] ref_theta(int i, logic [7:0] th0, int unsigned id, int s);
    longint unsigned idf, a, lam, beta;
    idf = 0;
    for (int n = 0; n < N; n++) idf += longint'(int'(grad_of(i, n)) * int'(grad_of(i, n)));
    a   = (longint'(ALPHA) * s) / 256;
    lam = (longint'(LAMBDA) * s) / 256;
    if (!(idf * 256 > a * id)) begin n_unsel++; return th0; end
    n_sel++;
    beta = (lam * id >= idf * 256) ? 256 : (lam * id) / idf;
    return 8'(int'($floor(real'($signed(th0)) * real'(beta) / 256.0 + 0.5)));
  endfunction

  task automatic run_case(string name, int classes);
    logic [31:0] r, st;
    logic [7:0] theta0 [];
    int unsigned id0 [];
    int t0, bound, errs, cps, sel0;
    cur_classes = classes;
    make_table(classes);
    mem.delete();
    theta0 = new[nparams[0]];
    id0 = new[nparams[0]];
    for (int i = 0; i < nparams[0]; i++) begin
      theta0[i] = 8'($urandom());
      id0[i] = $urandom_range(1, 2000);
      mem[(theta_base[0] >> 2) + 32'(i / 4)][8 * (i % 4) +: 8] = theta0[i];
      mem[(id_base[0] >> 2) + 32'(i)] = id0[i];
    end
    for (int l = 0; l < NL; l++) begin
      wr_eng(R_LTAB + 12'(16 * l) + 12'h0, 32'(nparams[l]));
      wr_eng(R_LTAB + 12'(16 * l) + 12'h4, theta_base[l]);
      wr_eng(R_LTAB + 12'(16 * l) + 12'h8, id_base[l]);
      wr_eng(R_LTAB + 12'(16 * l) + 12'hC, 32'(scale_q88(l + 1)));
    end
    wr_eng(R_NLAYERS, NL);
    wr_eng(R_CPMASK, 32'h0010_0001 | 32'h0001_1110);   // layers 1, 5, 9, 13, 17, 21
    wr_eng(R_ALPHA, ALPHA); wr_eng(R_LAMBDA, LAMBDA); wr_eng(R_TAU, TAU);
    t0 = cyc; cps = 0;
    wr_eng(R_CTRL, 1);
    forever begin
      rd_eng(R_STATUS, st);
      if (st[2]) begin
        cps++;
        bound = ((nparams[0] + P - 1) / P + 3) * (N * P + 300);
        checks += 2;
        if (st[15:8] != 8'd0) fail($sformatf("%s: first checkpoint at layer %0d", name, st[15:8] + 1));
        if (cyc - t0 > bound) fail($sformatf("%s: classifier took %0d cycles, bound %0d", name, cyc - t0, bound));
        $display("%s: classifier layer, %0d weights, %0d cycles (bound %0d)", name, nparams[0], cyc - t0, bound);
        wr_eng(R_AFORGET, 1);   // forget accuracy already at random guess
      end
      if (st[1] && !st[0]) break;
    end
    rd_eng(R_LDONE, r);
    checks += 3;
    if (cps != 1) fail($sformatf("%s: %0d checkpoints", name, cps));
    if (r != 1) fail($sformatf("%s: layers done = %0d, expected 1", name, r));
    if (!st[3]) fail($sformatf("%s: early-stop flag not set", name));
    errs = 0; sel0 = n_sel;
    for (int i = 0; i < nparams[0]; i++) begin
      logic [7:0] got, exp;
      got = mem[(theta_base[0] >> 2) + 32'(i / 4)][8 * (i % 4) +: 8];
      exp = ref_theta(i, theta0[i], id0[i], scale_q88(1));
      checks++;
      if (got != exp) begin
        errs++;
        if (errs <= 10) fail($sformatf("%s: theta[%0d] = %0d expected %0d", name, i, $signed(got), $signed(exp)));
        else failures++;
      end
    end
    $display("%s: %0d of %0d classifier weights dampened, run %0d cycles", name, n_sel - sel0, nparams[0], cyc - t0);
  endtask

  initial begin
    #(64'd10 * 64'd8_000_000);
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    eng_apb_req = '0; sram_apb_req = '0;
    repeat (5) @(posedge clk); rst_n = 1;
    run_case("faces C=105", 105);
    run_case("CIFAR-20", 20);
    checks += 4;
    if (n_bad_addr != 0)  fail($sformatf("%0d DMA accesses outside layer 1", n_bad_addr));
    if (n_bad_layer != 0) fail($sformatf("%0d GEMM requests for other layers", n_bad_layer));
    if (n_sel == 0 || n_unsel == 0) fail("selection never or always taken");
    if (n_dma_ld == 0 || n_dma_st == 0) fail("no DMA traffic");
    $display("selected=%0d unselected=%0d dma_loads=%0d dma_stores=%0d", n_sel, n_unsel, n_dma_ld, n_dma_st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
