// beta_gen -- dampening-strength generator of the Dampening unit.
//
// Combinational. Computes the SSD dampening factor
//     beta = min( lambda * I_D / I_Df , 1 )
// in unsigned Q1.8 (256 = 1.0), with lambda in Q16.8 and the importances as
// plain integers. A multiplier forms lambda*I_D (already Q.8, so the quotient
// comes out in Q.8 directly); a comparator checks lambda*I_D >= I_Df * 1.0
// and then returns exactly 1.0; otherwise the quotient is below 1.0 and an
// eight-step restoring divider produces its eight fraction bits, truncated.
// I_Df = 0 gives 1.0 (no dampening). The paper names the multiplier/divider
// and the comparator inside the beta generator; the restoring divider, the
// truncation and the formats are this design's choice.
module beta_gen
  import ficabu_pkg::*;
(
  input  hp_t   lambda,   // Q16.8, already scaled by S(l)
  input  imp_t  i_d,      // I_D
  input  imp_t  i_df,     // I_Df
  output beta_t beta      // Q1.8
);
  localparam int unsigned PW = HP_W + IMP_W;   // width of lambda*I_D

  always_comb begin
    logic [PW-1:0] num, rem, den_sh;
    logic [BETA_FRAC-1:0] q;
    num = PW'(lambda) * PW'(i_d);
    rem = num;
    den_sh = '0;
    q   = '0;
    if (num >= (PW'(i_df) << BETA_FRAC)) begin
      beta = beta_t'(BETA_ONE);
    end else begin
      for (int i = BETA_FRAC - 1; i >= 0; i--) begin
        den_sh = PW'(i_df) << i;
        if (rem >= den_sh) begin
          rem  = rem - den_sh;
          q[i] = 1'b1;
        end
      end
      beta = beta_t'(q);
    end
  end
endmodule
