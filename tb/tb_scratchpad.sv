// tb_scratchpad -- self-checking test of the engine scratchpad.
// Small sizes (N_BATCH = 2, PATCH = 8). Fills every region through its write
// port (GEMM, FIMD, Dampening with byte enables, DMA into I_D and theta-in)
// and reads every word back through each read port that the region serves,
// checking that the two I_Df copies agree and that the DMA's region select
// reaches only the addressed region.
module tb_scratchpad;
  import ficabu_pkg::*;
  localparam int N = 2, P = 8;
  localparam int GAW = $clog2(2*N*P), FAW = $clog2(2*P), IAW = $clog2(4*P), TIAW = $clog2(P), TOAW = $clog2(P/2);
  logic clk = 0;
  logic g_we, fg_re, ff_re, ff_we, df_re, di_re, dt_re, dt_we, m_we, m_re;
  logic [GAW-1:0] g_waddr, fg_raddr;
  grad_t g_wdata, fg_rdata;
  logic [FAW-1:0] ff_raddr, ff_waddr, df_raddr;
  imp_t ff_rdata, ff_wdata, df_rdata, di_rdata;
  logic [3:0] ff_wbe, dt_wbe;
  logic [IAW-1:0] di_raddr;
  logic [TIAW-1:0] dt_raddr;
  logic [TOAW-1:0] dt_waddr;
  logic [31:0] dt_rdata, dt_wdata, m_wdata, m_rdata;
  sp_region_e m_wregion;
  logic [15:0] m_waddr, m_raddr;
  int checks = 0, failures = 0;
  grad_t gs [2*N*P]; imp_t fs [2*P]; imp_t is_ [4*P]; logic [31:0] tis [P]; logic [31:0] tos [P/2];

  scratchpad #(.N_BATCH(N), .PATCH(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what, int a);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s[%0d] got %h exp %h", what, a, got, exp); end
  endtask

  initial begin
    {g_we, fg_re, ff_re, ff_we, df_re, di_re, dt_re, dt_we, m_we, m_re} = '0;
    g_waddr = 0; fg_raddr = 0; g_wdata = 0; ff_raddr = 0; ff_waddr = 0; df_raddr = 0; ff_wdata = 0;
    ff_wbe = 0; dt_wbe = 0; di_raddr = 0; dt_raddr = 0; dt_waddr = 0; dt_wdata = 0; m_wdata = 0;
    m_wregion = REG_ID; m_waddr = 0; m_raddr = 0;
    // writes
    for (int i = 0; i < 4*P; i++) begin
      @(negedge clk);
      g_we = 1; g_waddr = GAW'(i); g_wdata = grad_t'($urandom()); gs[i] = g_wdata;
      ff_we = (i < 2*P); ff_waddr = FAW'(i); ff_wbe = 4'hF; ff_wdata = $urandom(); if (i < 2*P) fs[i] = ff_wdata;
      m_we = 1; m_wregion = REG_ID; m_waddr = 16'(i); m_wdata = $urandom(); is_[i] = m_wdata;
      dt_we = (i < P/2); dt_waddr = TOAW'(i); dt_wbe = 4'hF; dt_wdata = $urandom(); if (i < P/2) tos[i] = dt_wdata;
    end
    for (int i = 0; i < P; i++) begin
      @(negedge clk);
      g_we = 0; ff_we = 0; dt_we = 0;
      m_we = 1; m_wregion = REG_TIN; m_waddr = 16'(i); m_wdata = $urandom(); tis[i] = m_wdata;
    end
    // byte-enable write into theta-out
    @(negedge clk); m_we = 0; dt_we = 1; dt_waddr = 1; dt_wbe = 4'b0100; dt_wdata = 32'hA5A5A5A5; tos[1][23:16] = 8'hA5;
    @(negedge clk); dt_we = 0;
    // reads
    for (int i = 0; i < 4*P; i++) begin
      @(negedge clk);
      fg_re = 1; fg_raddr = GAW'(i); ff_re = 1; ff_raddr = FAW'(i % (2*P)); df_re = 1; df_raddr = FAW'(i % (2*P));
      di_re = 1; di_raddr = IAW'(i); dt_re = 1; dt_raddr = TIAW'(i % P); m_re = 1; m_raddr = 16'(i % (P/2));
      @(posedge clk); #1;
      chk(32'(fg_rdata), 32'(gs[i]), "grad", i);
      chk(ff_rdata, fs[i % (2*P)], "idf_fimd", i);
      chk(df_rdata, fs[i % (2*P)], "idf_damp", i);
      chk(di_rdata, is_[i], "id", i);
      chk(dt_rdata, tis[i % P], "theta_in", i);
      chk(m_rdata, tos[i % (P/2)], "theta_out", i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
