// ln_update_unit: layer-node update for one edge of the factor graph.
//
// Takes the resource-to-layer message that the user of this edge received on
// its other resource (already routed by the RN-to-LN network) and normalizes
// it: in the log domain the paper's normalization to [0,1] becomes
//     I_L->R(m) = v(m) - max_m' v(m'),
// so the most likely codeword gets 0 and the others negative beliefs. This
// keeps the 16-bit beliefs from drifting towards saturation over the
// iterations and does not change any decision.
//
// The paper's FPGA unit uses four 16-bit dividers with a 28-cycle delay,
// which belongs to probability-domain normalization; its Max-Log equations
// and complexity table have no arithmetic in this step at all. This design
// keeps the normalization and does it as the log-domain subtraction
// (a design choice).
//
// Timing: one register stage; vld_o follows vld_i by one cycle.
module ln_update_unit
  import scma_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  vld_i,
  input  bvec_t v_i,
  output logic  vld_o,
  output bvec_t l_o
);

  belief_t mx;
  bvec_t   l_d;

  always_comb begin
    mx = v_i[0];
    for (int m = 1; m < M; m++)
      if (v_i[m] > mx) mx = v_i[m];
    for (int m = 0; m < M; m++)
      l_d[m] = sat_bel(32'(v_i[m]) - 32'(mx));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      l_o   <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) l_o <= l_d;
    end
  end

endmodule
