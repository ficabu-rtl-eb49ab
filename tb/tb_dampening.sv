// tb_dampening -- self-checking test of the Dampening unit.
// Small sizes (PATCH = 16, 4-entry buffers). The I_Df, I_D, theta-in and
// theta-out regions are modelled as one-cycle-latency RAMs. Operands are
// chosen so that each patch mixes unselected parameters, selected ones with
// beta < 1, selected ones whose beta clips at 1.0 (lambda > alpha), and
// I_Df = 0; the expected theta is computed here with 64-bit integer
// arithmetic and round-to-nearest, and bytes outside the patch must stay
// unchanged. Also checks the selected-parameter count and that a patch takes
// count cycles plus a bounded pipeline/drain overhead.
module tb_dampening;
  import ficabu_pkg::*;
  localparam int P = 16, FAW = 5, IAW = 6, TIAW = 4, TOAW = 3, BD = 4;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [15:0] count, sel_count;
  hp_t alpha, lambda;
  logic [FAW-1:0] idf_base, f_raddr;
  logic [IAW-1:0] id_base, i_raddr;
  logic [TIAW-1:0] tin_base, t_raddr;
  logic [TOAW-1:0] tout_base, t_waddr;
  logic f_re, i_re, t_re, t_we;
  imp_t f_rdata, i_rdata;
  logic [31:0] t_rdata, t_wdata;
  logic [3:0] t_wbe;
  int checks = 0, failures = 0, n_sel = 0, n_clip = 0, n_keep = 0;

  imp_t fmem [2*P];
  imp_t imem [4*P];
  logic [31:0] timem [P];
  logic [31:0] tomem [P/2];
  logic [7:0]  toref [2*P];

  dampening #(.PATCH(P), .FAW(FAW), .IAW(IAW), .TIAW(TIAW), .TOAW(TOAW), .BUF_DEPTH(BD)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (f_re) f_rdata <= fmem[f_raddr];
    if (i_re) i_rdata <= imem[i_raddr];
    if (t_re) t_rdata <= timem[t_raddr];
    if (t_we) for (int b = 0; b < 4; b++) if (t_wbe[b]) tomem[t_waddr][b*8 +: 8] <= t_wdata[b*8 +: 8];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_theta(int th, longint unsigned a, longint unsigned lam,
                                   longint unsigned id, longint unsigned idf, output bit sel, output bit clip);
    longint unsigned beta;
    sel  = (idf * 256) > (a * id);
    clip = 0;
    if (!sel) return th;
    if (lam * id >= idf * 256) begin beta = 256; clip = 1; end
    else beta = (lam * id) / idf;
    return int'($floor((real'(th) * real'(beta)) / 256.0 + 0.5));
  endfunction

  task automatic run(int fslot, int islot, int tislot, int toslot, int cnt, hp_t a, hp_t lam);
    int cyc, exp_sel;
    exp_sel = 0;
    for (int k = 0; k < cnt; k++) begin
      int th; bit s, c;
      th = int'($signed(timem[tislot*(P/4) + k/4][8*(k%4) +: 8]));
      toref[toslot*P + k] = 8'(ref_theta(th, a, lam, imem[islot*P + k], fmem[fslot*P + k], s, c));
      exp_sel += s; n_sel += s; n_clip += c; n_keep += !s;
    end
    @(negedge clk);
    start = 1; count = 16'(cnt); alpha = a; lambda = lam;
    idf_base = FAW'(fslot*P); id_base = IAW'(islot*P); tin_base = TIAW'(tislot*P/4); tout_base = TOAW'(toslot*P/4);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < cnt || cyc > cnt + BD + 12) begin
      failures++; $display("FAIL patch took %0d cycles for %0d parameters", cyc, cnt);
    end
    checks++;
    if (int'(sel_count) != exp_sel) begin
      failures++; $display("FAIL sel_count %0d expected %0d", sel_count, exp_sel);
    end
    @(negedge clk);
    for (int k = 0; k < 2*P; k++) begin
      checks++;
      if (tomem[k/4][8*(k%4) +: 8] != toref[k]) begin
        failures++; $display("FAIL theta[%0d] = %0d expected %0d", k, $signed(tomem[k/4][8*(k%4) +: 8]), $signed(toref[k]));
      end
    end
  endtask

  initial begin
    start = 0; count = 0; alpha = 0; lambda = 0; idf_base = 0; id_base = 0; tin_base = 0; tout_base = 0;
    for (int i = 0; i < P; i++) timem[i] = $urandom();
    timem[0][7:0] = 8'h80; timem[0][15:8] = 8'h7F;
    for (int i = 0; i < P/2; i++) begin tomem[i] = $urandom(); for (int b = 0; b < 4; b++) toref[i*4+b] = tomem[i][b*8 +: 8]; end
    for (int i = 0; i < 4*P; i++) imem[i] = $urandom_range(1, 1000);
    for (int i = 0; i < 2*P; i++) begin
      case (i % 4)
        0: fmem[i] = imem[i] * $urandom_range(30, 200);     // selected for alpha 10..25
        1: fmem[i] = imem[i] * $urandom_range(0, 5);        // not selected
        2: fmem[i] = 0;                                     // no importance
        default: fmem[i] = $urandom() >> $urandom_range(8, 30);
      endcase
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 0, 0, 0, P, 24'd2560, 24'd256);     // alpha 10, lambda 1
    run(1, 2, 3, 1, 12, 24'd6400, 24'd26);     // alpha 25, lambda ~0.1
    run(0, 1, 2, 0, 8, 24'd256, 24'd25600);    // lambda > alpha: beta clips at 1
    checks++;
    if (n_sel == 0 || n_keep == 0 || n_clip == 0) begin
      failures++; $display("FAIL coverage sel=%0d keep=%0d clip=%0d", n_sel, n_keep, n_clip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
