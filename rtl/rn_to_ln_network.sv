// rn_to_ln_network: the RN memory and the resource-to-layer message network.
//
// Stores the resource-to-layer beliefs I_R->L of all NE = 12 edges together
// with the stability matrix S (one bit per belief) written by the
// convergence units, and presents them three ways:
//   * mem_o      : by edge, as the previous-iteration values V_t;
//   * to_ln_o[e] : the message on the partner edge of e, i.e. from the other
//                  resource of the same user. This is the "swop" of the
//                  layer-node update: I_Lj->Rk takes I_Rk'->Lj (Eq. log5/6);
//   * to_sj_o    : per user j and dimension d, for the symbol judgement.
// all_stable_o is high when every bit of S is one (early termination).
// clr_i, at the start of a frame, zeroes the memory and S.
//
// Timing: a write (wr_i) on cycle t is visible on all outputs from t+1.
module rn_to_ln_network
  import scma_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr_i,
  input  logic          wr_i,
  input  bvec_t         wdata_i   [NE],
  input  logic [M-1:0]  wstable_i [NE],
  output bvec_t         mem_o     [NE],
  output bvec_t         to_ln_o   [NE],
  output bvec_t         to_sj_o   [J][N],
  output logic          all_stable_o
);

  bvec_t        mem_q [NE];
  logic [M-1:0] s_q   [NE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NE; e++) begin
        mem_q[e] <= '0;
        s_q[e]   <= '0;
      end
    end else if (clr_i) begin
      for (int e = 0; e < NE; e++) begin
        mem_q[e] <= '0;
        s_q[e]   <= '0;
      end
    end else if (wr_i) begin
      mem_q <= wdata_i;
      s_q   <= wstable_i;
    end
  end

  always_comb begin
    all_stable_o = 1'b1;
    for (int e = 0; e < NE; e++) begin
      mem_o[e]   = mem_q[e];
      to_ln_o[e] = mem_q[PARTNER[e]];
      all_stable_o &= &s_q[e];
    end
    for (int j = 0; j < J; j++)
      for (int d = 0; d < N; d++)
        to_sj_o[j][d] = mem_q[USER_EDGE[j*N+d]];
  end

endmodule
