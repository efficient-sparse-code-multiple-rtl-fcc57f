// ln_to_rn_network: the LN memory and the layer-to-resource message network.
//
// Stores the layer-to-resource beliefs I_L->R of all NE = 12 edges and hands
// each resource-node unit the messages of the two other users on its
// resource: for edge e = k*DF + s, la_o[e] is the message of the lower other
// slot and lb_o[e] that of the higher one.
// At the start of every frame (clr_i) all beliefs are reset to 0, the
// log-domain uniform prior, as the paper requires of the layer-node network.
//
// Timing: a write (wr_i) or clear on cycle t is visible from t+1.
module ln_to_rn_network
  import scma_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr_i,
  input  logic  wr_i,
  input  bvec_t wdata_i [NE],
  output bvec_t la_o    [NE],
  output bvec_t lb_o    [NE]
);

  bvec_t mem_q [NE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NE; e++) mem_q[e] <= '0;
    end else if (clr_i) begin
      for (int e = 0; e < NE; e++) mem_q[e] <= '0;
    end else if (wr_i) begin
      mem_q <= wdata_i;
    end
  end

  always_comb begin
    for (int k = 0; k < K; k++)
      for (int s = 0; s < DF; s++) begin
        la_o[k*DF+s] = mem_q[k*DF + other_slot(s, 0)];
        lb_o[k*DF+s] = mem_q[k*DF + other_slot(s, 1)];
      end
  end

endmodule
