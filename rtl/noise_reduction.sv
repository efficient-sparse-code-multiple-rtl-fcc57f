// noise_reduction: receiver side of the paper's "initial noise reduction".
//
// The transmitter spreads the four multiplexed resource signals over the four
// subcarriers with a "distributed matrix" D, so that each received value is a
// mix of all four and picks up noise of both signs. The receiver undoes the
// mix with D^-1 before decoding:  y'_i = sum_k Dinv[i][k] * y_k, separately
// for the real and imaginary parts. The paper's example D is
// 0.1*[1 4 3 2; 2 1 4 3; 3 2 1 4; 4 3 2 1] and says D may change with the
// codebook and channel, so Dinv is an input, not a constant. Loading the
// identity turns the stage off.
//
// Fixed point (design choice): Dinv entries are signed Q3.12 (16 bits), the
// products are summed at full width, rounded to nearest and saturated back
// to 8 bits, the paper's input quantization.
//
// Timing: one register stage; vld_o follows vld_i by one cycle and y_o is
// valid while vld_o is high and held until the next vld_i.
module noise_reduction
  import scma_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   vld_i,
  input  cplx_t  y_i    [K],
  input  coef_t  dinv_i [K][K],
  output logic   vld_o,
  output cplx_t  y_o    [K]
);

  function automatic sample_t round_sat(input logic signed [31:0] acc);
    logic signed [31:0] r;
    r = (acc + 32'sd2048) >>> COEF_F;
    if (r > 32'sd127)       return sample_t'(127);
    else if (r < -32'sd128) return sample_t'(-128);
    else                    return sample_t'(r);
  endfunction

  cplx_t y_d [K];

  always_comb begin
    for (int i = 0; i < K; i++) begin
      logic signed [31:0] acc_re, acc_im;
      acc_re = '0;
      acc_im = '0;
      for (int k = 0; k < K; k++) begin
        acc_re += 32'(dinv_i[i][k]) * 32'(y_i[k].re);
        acc_im += 32'(dinv_i[i][k]) * 32'(y_i[k].im);
      end
      y_d[i].re = round_sat(acc_re);
      y_d[i].im = round_sat(acc_im);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      for (int i = 0; i < K; i++) y_o[i] <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) y_o <= y_d;
    end
  end

endmodule
