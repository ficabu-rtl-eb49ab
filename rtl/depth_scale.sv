// depth_scale -- Balanced Dampening hyperparameter scaling.
//
// Combinational. Applies the depth-aware profile of Balanced Dampening,
//     (alpha, lambda) -> S(l) * (alpha, lambda),
// to the base SSD hyperparameters before they reach the Dampening unit.
// alpha and lambda are unsigned Q16.8, S(l) unsigned Q8.8; results are
// truncated to Q16.8 and saturate at the largest Q16.8 value.
// S(l) itself, the normalised sigmoid
//     S(l) = 1 + (b_r - 1) * (sig(l) - sig(1)) / (sig(L) - sig(1)),
//     sig(l) = 1 / (1 + exp(-(l - c_m))),
// is evaluated by the host for each layer and written into the layer table;
// only the multiplication is done here. Where S(l) is computed, and the
// saturation, are this design's choice.
module depth_scale
  import ficabu_pkg::*;
(
  input  hp_t    alpha,
  input  hp_t    lambda,
  input  scale_t scale,       // S(l), Q8.8
  output hp_t    alpha_s,
  output hp_t    lambda_s
);
  localparam int unsigned PW = HP_W + SCALE_W;

  function automatic hp_t scale_sat(hp_t v, scale_t s);
    logic [PW-1:0] p;
    p = (PW'(v) * PW'(s)) >> SCALE_FRAC;
    return (p > PW'({HP_W{1'b1}})) ? {HP_W{1'b1}} : p[HP_W-1:0];
  endfunction

  assign alpha_s  = scale_sat(alpha, scale);
  assign lambda_s = scale_sat(lambda, scale);
endmodule
