// rn_update_unit: resource-node update for one edge of the factor graph.
//
// For the user on slot SLOT of a resource it computes the Max-Log message
//     I_R->L(m) = max over (ma, mb) of  P(m, ma, mb) + I_La->R(ma) + I_Lb->R(mb)
// for each of its M = 4 codewords m, where La and Lb are the two other users
// of the resource (lower slot first) and P is the initial log-probability of
// the combination. Each of the M outputs is the largest of M*M = 16 sums.
//
// Structure (follows the paper's module description): the 16 sums of every
// output are formed in one adder stage (two saturating adds each), then
// reduced by a tree of comparators with registers after the 16->8, 8->4 and
// 4->2 levels (the paper's "3 steps of comparison with 14 buffers" per
// output, 56 per unit) and a final 2->1 comparison into the output register.
//
// Timing: fully pipelined, latency 5 cycles from vld_i to vld_o. p_i, la_i and
// lb_i are sampled in the vld_i cycle.
module rn_update_unit #(
  parameter int SLOT = 0     // slot of the receiving user on its resource
)(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    vld_i,
  input  scma_pkg::belief_t p_i [scma_pkg::NCOMB],   // P of the resource, index comb_idx()
  input  scma_pkg::bvec_t   la_i,          // I_L->R of the lower other slot
  input  scma_pkg::bvec_t   lb_i,          // I_L->R of the higher other slot
  output logic    vld_o,
  output scma_pkg::bvec_t   r_o
);

  import scma_pkg::*;

  // slots of the two other users and the index weight of each slot in P
  localparam int O0 = (SLOT == 0) ? 1 : 0;
  localparam int O1 = (SLOT == 2) ? 1 : 2;
  localparam int W_OWN = M ** (DF - 1 - SLOT);
  localparam int W_A   = M ** (DF - 1 - O0);
  localparam int W_B   = M ** (DF - 1 - O1);

  belief_t s16_d [M][NOTH];
  belief_t s16_q [M][NOTH];
  belief_t s8_q  [M][8];
  belief_t s4_q  [M][4];
  belief_t s2_q  [M][2];
  logic [3:0] vld_q;

  function automatic belief_t bmax(input belief_t a, input belief_t b);
    return (a >= b) ? a : b;
  endfunction

  // adder stage: P(m, ma, mb) + I_La->R(ma) + I_Lb->R(mb)
  always_comb begin
    for (int m = 0; m < M; m++)
      for (int ma = 0; ma < M; ma++)
        for (int mb = 0; mb < M; mb++)
          s16_d[m][ma*M+mb] = sat_bel(32'(p_i[m*W_OWN + ma*W_A + mb*W_B])
                                    + 32'(la_i[ma]) + 32'(lb_i[mb]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      vld_o <= 1'b0;
      r_o   <= '0;
      s16_q <= '{default: '0};
      s8_q  <= '{default: '0};
      s4_q  <= '{default: '0};
      s2_q  <= '{default: '0};
    end else begin
      vld_q <= {vld_q[2:0], vld_i};
      vld_o <= vld_q[3];
      s16_q <= s16_d;
      // comparison tree
      for (int m = 0; m < M; m++) begin
        for (int i = 0; i < 8; i++) s8_q[m][i] <= bmax(s16_q[m][2*i], s16_q[m][2*i+1]);
        for (int i = 0; i < 4; i++) s4_q[m][i] <= bmax(s8_q[m][2*i],  s8_q[m][2*i+1]);
        for (int i = 0; i < 2; i++) s2_q[m][i] <= bmax(s4_q[m][2*i],  s4_q[m][2*i+1]);
        r_o[m] <= bmax(s2_q[m][0], s2_q[m][1]);
      end
    end
  end

endmodule
