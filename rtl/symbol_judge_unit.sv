// symbol_judge_unit: probability calculation and symbol judgement, one user.
//
// Adds the two resource-to-layer messages the user received,
//     Q(m) = I_R1->L(m) + I_R2->L(m)   (saturating),
// and picks the codeword with the largest Q. The paper's unit compares the
// 4 beliefs in 2 steps with 3 buffers (2 after the first step, 1 after the
// second); ties go to the lower codeword index (a design choice). The
// symbol selector then maps the winning codeword to the user's bits; with the
// codebook stored in bit order (codeword m carries the bits of m) the
// selection is the index itself.
//
// Timing: three register stages (add, compare, compare/select); vld_o
// follows vld_i by 3 cycles and sym_o holds until the next result.
module symbol_judge_unit
  import scma_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  vld_i,
  input  bvec_t r0_i,
  input  bvec_t r1_i,
  output logic  vld_o,
  output sym_t  sym_o
);

  bvec_t   q_q;
  belief_t b_q [2];
  sym_t    i_q [2];
  logic    v1_q, v2_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q  <= 1'b0;
      v2_q  <= 1'b0;
      vld_o <= 1'b0;
      q_q   <= '0;
      b_q   <= '{default: '0};
      i_q   <= '{default: '0};
      sym_o <= '0;
    end else begin
      v1_q  <= vld_i;
      v2_q  <= v1_q;
      vld_o <= v2_q;
      if (vld_i)
        for (int m = 0; m < M; m++) q_q[m] <= sat_bel(32'(r0_i[m]) + 32'(r1_i[m]));
      if (v1_q)
        for (int h = 0; h < 2; h++) begin
          if (q_q[2*h] >= q_q[2*h+1]) begin
            b_q[h] <= q_q[2*h];
            i_q[h] <= sym_t'(2*h);
          end else begin
            b_q[h] <= q_q[2*h+1];
            i_q[h] <= sym_t'(2*h+1);
          end
        end
      if (v2_q)
        sym_o <= (b_q[0] >= b_q[1]) ? i_q[0] : i_q[1];
    end
  end

endmodule
