// init_unit: initialization step of the Max-Log decoder.
//
// For every resource k and every combination (m0, m1, m2) of the codewords of
// the three users on k it computes the initial log-probability
//     P_k = -(1/N0) * |y_k - (x_0 + x_1 + x_2)|^2          (EXACT)
// or one of the paper's three cheaper variants selected by mode_i:
//     APPROX1 -(1/N0)*|d|,  APPROX2 -|d|^2,  APPROX3 -|d|.
// The paper's decoder uses APPROX3, which needs neither multiplier nor
// divider. The paper writes |d| without saying how the complex magnitude is
// formed; this design uses |Re d| + |Im d| so that APPROX1/3 stay
// square-root free (a design choice).
//
// Structure: the paper's DFG (A0-A27 adders, B0-B11 multipliers) computes
// one combination per branch; here all K*M^3 = 256 branches are laid out in
// parallel so that a whole frame is initialized at once, in three register
// stages:
//   1. d = y - x0 - x1 - x2 (real and imaginary, 10 bits)
//   2. magnitude: |d_re|^2 + |d_im|^2 or |d_re| + |d_im|
//   3. scaling by 1/N0 (unsigned Q8.8, EXACT and APPROX1 only), negation,
//      saturation to the 16-bit belief range.
// The results are held in the output register (the paper's P_k memory) until
// the next frame.
//
// Timing: vld_o rises three cycles after vld_i; y_i, cb_i, inv_n0_i and
// mode_i are sampled in the vld_i cycle (stage 1) and the stage-3 cycle.
module init_unit
  import scma_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            vld_i,
  input  cplx_t           y_i   [K],
  input  sample_t         cb_i  [CB_N],
  input  logic [N0_W-1:0] inv_n0_i,
  input  approx_e         mode_i,
  output logic            vld_o,
  output belief_t         p_o   [K][NCOMB]
);

  localparam int D_W   = IN_W + 2;      // y - 3 codeword parts
  localparam int MAG_W = 2 * D_W + 1;   // |d_re|^2 + |d_im|^2

  typedef logic signed [D_W-1:0] diff_t;
  typedef logic [MAG_W-1:0]      mag_t;

  diff_t dre_q [K][NCOMB];
  diff_t dim_q [K][NCOMB];
  mag_t  mag_q [K][NCOMB];
  logic  v1_q, v2_q;

  diff_t dre_d [K][NCOMB];
  diff_t dim_d [K][NCOMB];
  mag_t  mag_d [K][NCOMB];

  // stage 1: residual after removing the three codewords
  always_comb begin
    for (int k = 0; k < K; k++)
      for (int c = 0; c < NCOMB; c++) begin
        dre_d[k][c] = D_W'(y_i[k].re)
                    - D_W'(cb_i[cb_index(RES_USER[k*DF+0], c / (M*M),   RES_DIM[k*DF+0], 0)])
                    - D_W'(cb_i[cb_index(RES_USER[k*DF+1], (c / M) % M, RES_DIM[k*DF+1], 0)])
                    - D_W'(cb_i[cb_index(RES_USER[k*DF+2], c % M,       RES_DIM[k*DF+2], 0)]);
        dim_d[k][c] = D_W'(y_i[k].im)
                    - D_W'(cb_i[cb_index(RES_USER[k*DF+0], c / (M*M),   RES_DIM[k*DF+0], 1)])
                    - D_W'(cb_i[cb_index(RES_USER[k*DF+1], (c / M) % M, RES_DIM[k*DF+1], 1)])
                    - D_W'(cb_i[cb_index(RES_USER[k*DF+2], c % M,       RES_DIM[k*DF+2], 1)]);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q  <= 1'b0;
      dre_q <= '{default: '0};
      dim_q <= '{default: '0};
    end else begin
      v1_q <= vld_i;
      if (vld_i) begin
        dre_q <= dre_d;
        dim_q <= dim_d;
      end
    end
  end

  // stage 2: magnitude (squared or L1)
  always_comb begin
    for (int k = 0; k < K; k++)
      for (int c = 0; c < NCOMB; c++) begin
        logic [D_W-1:0] are, aim;
        are = dre_q[k][c][D_W-1] ? D_W'(-dre_q[k][c]) : D_W'(dre_q[k][c]);
        aim = dim_q[k][c][D_W-1] ? D_W'(-dim_q[k][c]) : D_W'(dim_q[k][c]);
        if (mode_i == EXACT || mode_i == APPROX2)
          mag_d[k][c] = MAG_W'(are * are) + MAG_W'(aim * aim);
        else
          mag_d[k][c] = MAG_W'(are) + MAG_W'(aim);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2_q  <= 1'b0;
      mag_q <= '{default: '0};
    end else begin
      v2_q <= v1_q;
      if (v1_q) mag_q <= mag_d;
    end
  end

  // stage 3: -1/N0 scaling, negation and saturation (the P_k memory)
  belief_t p_d [K][NCOMB];

  always_comb begin
    for (int k = 0; k < K; k++)
      for (int c = 0; c < NCOMB; c++) begin
        logic [MAG_W+N0_W-1:0] scaled;
        if (mode_i == EXACT || mode_i == APPROX1)
          scaled = ((MAG_W+N0_W)'(mag_q[k][c]) * (MAG_W+N0_W)'(inv_n0_i)) >> N0_F;
        else
          scaled = (MAG_W+N0_W)'(mag_q[k][c]);
        if (scaled > (MAG_W+N0_W)'(2**(BEL_W-1)))
          p_d[k][c] = BEL_MIN;
        else
          p_d[k][c] = belief_t'(-$signed({1'b0, scaled}));
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      p_o   <= '{default: '0};
    end else begin
      vld_o <= v2_q;
      if (v2_q) p_o <= p_d;
    end
  end

endmodule
