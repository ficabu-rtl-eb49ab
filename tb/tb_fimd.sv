// tb_fimd -- self-checking test of the FIMD unit.
// Small sizes (N_BATCH = 4, PATCH = 16, 4-entry buffers) keep it short. The
// testbench models the gradient and I_Df regions as one-cycle-latency RAMs,
// fills them with random INT8 gradients (including -128) and random stored
// importances, runs a full patch without accumulation and a partial patch
// with accumulation in the other slot, and checks every I_Df word against
// sum of squares computed here, that words outside the patch are untouched,
// and that a patch takes count*N_BATCH cycles plus a bounded overhead.
module tb_fimd;
  import ficabu_pkg::*;
  localparam int N = 4, P = 16, GAW = 7, FAW = 5, BD = 4;
  logic clk = 0, rst_n = 0;
  logic start, accumulate, busy, done;
  logic [15:0] count;
  logic [GAW-1:0] grad_base, g_raddr;
  logic [FAW-1:0] idf_base, f_raddr, f_waddr;
  logic g_re, f_re, f_we;
  grad_t g_rdata;
  imp_t f_rdata, f_wdata;
  logic [3:0] f_wbe;
  int checks = 0, failures = 0;

  grad_t gmem [2*N*P];
  imp_t  fmem [2*P];
  imp_t  fref [2*P];

  fimd #(.N_BATCH(N), .PATCH(P), .GAW(GAW), .FAW(FAW), .BUF_DEPTH(BD)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (g_re) g_rdata <= gmem[g_raddr];
    if (f_re) f_rdata <= fmem[f_raddr];
    if (f_we) fmem[f_waddr] <= f_wdata;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int slot, int cnt, bit acc);
    int cyc;
    for (int k = 0; k < cnt; k++) begin
      longint unsigned s;
      s = acc ? longint'(fmem[slot*P + k]) : 0;
      for (int n = 0; n < N; n++) s += longint'(int'(gmem[slot*N*P + n*P + k]) * int'(gmem[slot*N*P + n*P + k]));
      fref[slot*P + k] = imp_t'(s);
    end
    @(negedge clk);
    start = 1; count = 16'(cnt); grad_base = GAW'(slot*N*P); idf_base = FAW'(slot*P); accumulate = acc;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < cnt*N || cyc > cnt*N + BD + 12) begin
      failures++; $display("FAIL patch took %0d cycles for %0d gradients", cyc, cnt*N);
    end
    @(negedge clk);
    for (int k = 0; k < 2*P; k++) begin
      checks++;
      if (fmem[k] != fref[k]) begin
        failures++; $display("FAIL I_Df[%0d] = %0d expected %0d", k, fmem[k], fref[k]);
      end
    end
  endtask

  initial begin
    start = 0; count = 0; grad_base = 0; idf_base = 0; accumulate = 0;
    for (int i = 0; i < 2*N*P; i++) gmem[i] = grad_t'($urandom());
    gmem[3] = -128; gmem[P+3] = -128;
    for (int i = 0; i < 2*P; i++) begin fmem[i] = $urandom() >> 4; fref[i] = fmem[i]; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, P, 0);
    run(1, 10, 1);
    run(0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
