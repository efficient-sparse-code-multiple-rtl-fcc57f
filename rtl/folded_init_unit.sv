// folded_init_unit: initialization step built from folded branches.
//
// Computes the same P memory as init_unit in its exact Max-Log mode,
//     P_k(m0, m1, m2) = -(1/N0) * |y_k - (x_0 + x_1 + x_2)|^2,
// but with the paper's folded architecture instead of one branch per
// combination: one folded_init_branch per resource (four in parallel, as in
// the "4 parallel" rows of the stage-level schedule), each with a single
// adder and a single multiplier, fed one codeword combination every 7
// cycles. A combination counter walks the 64 combinations (m0, m1, m2) of
// the three users on the resource; the branch results are written into the
// P memory at the matching index (m0*16 + m1*4 + m2).
//
// Interface: same as init_unit without the mode input (the folded branch is
// the exact Max-Log equation of the paper's branch figure). y_i is captured
// when vld_i is seen; cb_i and inv_n0_i must stay constant until vld_o.
// vld_i while busy is ignored (the decoder's controller never does that).
//
// Timing: the unit registers vld_i, then waits for the branches' slot 0
// (0 to 6 cycles) and offers one combination per 7 cycles; the 64th result
// leaves its branch 39 cycles after it entered and vld_o follows one cycle
// later. In total vld_o comes 482 to 488 cycles after vld_i, against 3 for
// init_unit: the cost side of the trade in the paper's folding table (fewer
// adders and multipliers, more cycles).
module folded_init_unit
  import scma_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            vld_i,
  input  cplx_t           y_i   [K],
  input  sample_t         cb_i  [CB_N],
  input  logic [N0_W-1:0] inv_n0_i,
  output logic            vld_o,
  output belief_t         p_o   [K][NCOMB]
);

  localparam int CW = $clog2(NCOMB + 1);

  logic          busy_q;
  logic [CW-1:0] c_in_q, c_out_q;
  cplx_t         y_q [K];
  logic          br_ready [K];
  logic          br_vld   [K];
  belief_t       br_p     [K];
  cplx_t         br_x     [K][DF];
  logic          offer;
  logic [MB-1:0] mslot [DF];

  // codeword index of each slot for the combination being offered
  always_comb begin
    mslot[0] = MB'(int'(c_in_q) / (M * M));
    mslot[1] = MB'((int'(c_in_q) / M) % M);
    mslot[2] = MB'(int'(c_in_q) % M);
  end

  assign offer = busy_q && (c_in_q < CW'(NCOMB)) && br_ready[0];

  for (genvar k = 0; k < K; k++) begin : g_br
    always_comb begin
      for (int s = 0; s < DF; s++) begin
        br_x[k][s].re = cb_i[cb_index(RES_USER[k*DF+s], int'(mslot[s]), RES_DIM[k*DF+s], 0)];
        br_x[k][s].im = cb_i[cb_index(RES_USER[k*DF+s], int'(mslot[s]), RES_DIM[k*DF+s], 1)];
      end
    end

    folded_init_branch u_br (
      .clk, .rst_n,
      .vld_i      (offer),
      .in_ready_o (br_ready[k]),
      .y_i        (y_q[k]),
      .x_i        (br_x[k]),
      .inv_n0_i   (inv_n0_i),
      .vld_o      (br_vld[k]),
      .p_o        (br_p[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      c_in_q  <= '0;
      c_out_q <= '0;
      y_q     <= '{default: '0};
      p_o     <= '{default: '0};
      vld_o   <= 1'b0;
    end else begin
      vld_o <= 1'b0;
      if (!busy_q) begin
        if (vld_i) begin
          busy_q  <= 1'b1;
          c_in_q  <= '0;
          c_out_q <= '0;
          y_q     <= y_i;
        end
      end else begin
        if (offer) c_in_q <= c_in_q + 1'b1;
        if (br_vld[0]) begin
          for (int k = 0; k < K; k++) p_o[k][c_out_q[CW-2:0]] <= br_p[k];
          c_out_q <= c_out_q + 1'b1;
          if (c_out_q == CW'(NCOMB - 1)) begin
            busy_q <= 1'b0;
            vld_o  <= 1'b1;
          end
        end
      end
    end
  end

endmodule
