// convergence_unit: stability judgement and self-adaption of one message.
//
// Compares each of the M beliefs V of a freshly computed resource-to-layer
// message with its value V_t from the previous iteration, using the ratio
// r = (V - V_t) / V_t and the judgement constant eps:
//   * early termination (paper Alg. 1): stable when |r| <= eps;
//   * self-adaption (paper Alg. 2, when adapt_i = 1): if r >= eps the belief
//     is extrapolated, V <- alpha*V (alpha > 1); if r <= -eps, V <- beta*V
//     (beta < 1); otherwise it is stable.
// The division is avoided by comparing V - V_t with eps*|V_t| and taking the
// sign of V_t into account; V_t = 0 counts as stable only if V = 0 and is
// never scaled. eps, alpha and beta are not given numerically in the paper;
// here they are powers of two set at run time: eps = 2^-eps_sh,
// alpha = 1 + 2^-alpha_sh, beta = 1 - 2^-beta_sh (shift-and-add, no
// multiplier; the paper notes the factor should be smaller at high SNR).
// In the first iteration of a frame (first_i) there is no previous value: all
// beliefs are reported unstable and passed unchanged.
//
// Timing: purely combinational; the result is registered in the RN memory.
module convergence_unit
  import scma_pkg::*;
(
  input  logic              first_i,
  input  logic              adapt_i,
  input  logic [SH_W-1:0]   alpha_sh_i,
  input  logic [SH_W-1:0]   beta_sh_i,
  input  logic [SH_W-1:0]   eps_sh_i,
  input  bvec_t             v_i,        // present iteration
  input  bvec_t             vt_i,       // previous iteration
  output bvec_t             v_o,        // after self-adaption
  output logic [M-1:0]      stable_o,
  output logic [M-1:0]      up_o,       // scaled by alpha
  output logic [M-1:0]      down_o      // scaled by beta
);

  always_comb begin
    for (int m = 0; m < M; m++) begin
      logic signed [BEL_W:0] d, e;
      logic ge_eps, le_neg, in_band;
      d = (BEL_W+1)'(v_i[m]) - (BEL_W+1)'(vt_i[m]);
      e = (vt_i[m] < 0) ? (-((BEL_W+1)'(vt_i[m])) >>> eps_sh_i)
                        : (((BEL_W+1)'(vt_i[m])) >>> eps_sh_i);
      if (vt_i[m] == 0) begin
        ge_eps = 1'b0;
        le_neg = 1'b0;
        in_band = (d == 0);
      end else if (vt_i[m] > 0) begin
        ge_eps = (d >= e);
        le_neg = (d <= -e);
        in_band = (d <= e) && (d >= -e);
      end else begin
        ge_eps = (d <= -e);
        le_neg = (d >= e);
        in_band = (d <= e) && (d >= -e);
      end

      v_o[m]      = v_i[m];
      up_o[m]     = 1'b0;
      down_o[m]   = 1'b0;
      stable_o[m] = 1'b0;
      if (!first_i) begin
        if (adapt_i) begin
          if (ge_eps) begin
            up_o[m] = 1'b1;
            v_o[m]  = sat_bel(32'(v_i[m]) + (32'(v_i[m]) >>> alpha_sh_i));
          end else if (le_neg) begin
            down_o[m] = 1'b1;
            v_o[m]    = sat_bel(32'(v_i[m]) - (32'(v_i[m]) >>> beta_sh_i));
          end else begin
            stable_o[m] = (vt_i[m] != 0) || in_band;
          end
        end else begin
          stable_o[m] = in_band;
        end
      end
    end
  end

endmodule
