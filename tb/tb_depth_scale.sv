// tb_depth_scale -- self-checking test of the Balanced Dampening scaler.
// Checks S(l)*(alpha, lambda) against 64-bit integer arithmetic for the
// paper's operating points (alpha 10/25/50, lambda 1/0.1, S from 1 to 10),
// random values and the saturation case.
module tb_depth_scale;
  import ficabu_pkg::*;
  hp_t alpha, lambda, alpha_s, lambda_s;
  scale_t scale;
  int checks = 0, failures = 0;

  depth_scale dut (.alpha, .lambda, .scale, .alpha_s, .lambda_s);

  function automatic longint unsigned ref_s(longint unsigned v, longint unsigned s);
    longint unsigned p;
    p = (v * s) / 256;
    return (p > 64'hFFFFFF) ? 64'hFFFFFF : p;
  endfunction

  task automatic check(hp_t a, hp_t lam, scale_t s);
    alpha = a; lambda = lam; scale = s;
    #1;
    checks += 2;
    if (longint'(alpha_s) != ref_s(a, s)) begin
      failures++; $display("FAIL alpha %0d*%0d -> %0d", a, s, alpha_s);
    end
    if (longint'(lambda_s) != ref_s(lam, s)) begin
      failures++; $display("FAIL lambda %0d*%0d -> %0d", lam, s, lambda_s);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(24'd2560, 24'd256, 16'd256);      // (10, 1) at S = 1
    check(24'd2560, 24'd256, 16'd2560);     // (10, 1) at S = b_r = 10
    check(24'd12800, 24'd26, 16'd1000);     // (50, ~0.1) at S ~ 3.9
    check(24'd6400, 24'd256, 16'd384);      // (25, 1) at S = 1.5
    check(24'hFFFFFF, 24'hFFFFFF, 16'd512); // saturates
    for (int i = 0; i < 2000; i++)
      check(hp_t'($urandom()), hp_t'($urandom()), scale_t'($urandom()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
