// tb_beta_gen -- self-checking test of the beta generator.
// Drives corner cases (I_Df = 0, exact clip boundary, quotient just below
// 1.0, large operands) and random operands, and compares beta with
// min(floor(lambda*I_D/I_Df), 256) computed with 64-bit integer division.
module tb_beta_gen;
  import ficabu_pkg::*;
  hp_t   lambda;
  imp_t  i_d, i_df;
  beta_t beta;
  int checks = 0, failures = 0;

  beta_gen dut (.lambda, .i_d, .i_df, .beta);

  function automatic int unsigned ref_beta(longint unsigned lam, longint unsigned id, longint unsigned idf);
    longint unsigned num, q;
    num = lam * id;
    if (idf == 0) return 256;
    q = num / idf;
    return (q >= 256) ? 256 : int'(q);
  endfunction

  task automatic check(hp_t lam, imp_t id, imp_t idf);
    int unsigned exp;
    lambda = lam; i_d = id; i_df = idf;
    #1;
    exp = ref_beta(lam, id, idf);
    checks++;
    if (int'(beta) != exp) begin
      failures++;
      $display("FAIL lambda=%0d id=%0d idf=%0d beta=%0d exp=%0d", lam, id, idf, beta, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(24'd256, 32'd10, 32'd0);          // I_Df = 0
    check(24'd256, 32'd10, 32'd10);         // exactly 1.0
    check(24'd256, 32'd10, 32'd11);         // just below 1.0
    check(24'd26,  32'd100, 32'd5000);      // lambda ~ 0.1
    check(24'd256, 32'd1, 32'd1000);        // small beta
    check(24'hFFFFFF, 32'hFFFFFFFF, 32'hFFFFFFFF);
    check(24'd256, 32'hFFFF0000, 32'hFFFFFFFF);
    check(24'd1, 32'd1, 32'hFFFFFFFF);      // beta rounds to 0
    for (int i = 0; i < 3000; i++) begin
      imp_t id, idf;
      id  = $urandom() >> ($urandom_range(0, 31));
      idf = $urandom() >> ($urandom_range(0, 31));
      check(hp_t'($urandom_range(1, 4096)), id, idf);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
