// scma_decoder: Max-Log message-passing SCMA decoder, J = 6 users on K = 4
// resources, M = 4 codewords per user.
//
// One frame is the four complex samples y_1..y_4 received on the four
// subcarriers; the decoder returns the codeword (2 bits) each of the six
// users sent. The data path follows the paper's block diagram:
//
//   in_y -> noise_reduction (D^-1) -> init_unit (P_k memory)
//        -> 12 x rn_update_unit -> 12 x convergence_unit -> rn_to_ln_network
//        -> 12 x ln_update_unit -> ln_to_rn_network -> back to the RN units
//   rn_to_ln_network -> 6 x symbol_judge_unit -> out_sym
//
// with codebook_mem feeding the initialization and decoder_ctrl sequencing
// the frame. All 12 edges of the factor graph are processed in parallel
// (the paper's unfolded FPGA configuration), so an iteration takes 8 cycles.
//
// Interface:
//   * codebook: write the 96 words through cb_we/cb_addr/cb_wdata while the
//     decoder is idle (address map in scma_pkg::cb_index);
//   * configuration (hold stable while a frame is decoded): inv_n0 (1/N0,
//     unsigned Q8.8), approx_mode (EXACT, APPROX1..3; the paper's decoder uses
//     APPROX3), dinv (inverse distributed matrix, signed Q3.12), max_iter
//     (I_max, 1..7), en_et (early termination), en_adapt (self-adaption),
//     alpha_sh/beta_sh/eps_sh (alpha = 1+2^-a, beta = 1-2^-b, eps = 2^-e);
//   * frames: valid/ready on in_valid/in_ready, one frame in flight. in_y is
//     taken in the handshake cycle.
//   * results: out_valid pulses once per frame; out_sym, out_iters (number
//     of iterations run) and out_early (stopped by early termination) are
//     held until the next result.
//
// Timing: out_valid follows the handshake cycle by 8*I + 5 cycles when I
// iterations run; a new frame can be accepted the cycle after out_valid.
//
// Parameter FOLDED_INIT (default 0) selects the initialization: 0 is the
// unfolded init_unit, the configuration the paper implements and measures;
// 1 is folded_init_unit, built from the paper's folded branch (one adder and
// one multiplier per resource). The folded build computes the exact Max-Log
// equation only (approx_mode is then ignored) and adds 479 to 485 cycles to
// every frame: latency 8*I + 2 + (482..488).
module scma_decoder
  import scma_pkg::*;
#(
  // 0: the paper's evaluated, unfolded initialization (init_unit, all modes)
  // 1: the paper's folded initialization (folded_init_unit, exact mode only)
  parameter bit FOLDED_INIT = 1'b0
)
(
  input  logic              clk,
  input  logic              rst_n,
  // codebook write port
  input  logic              cb_we,
  input  logic [CB_AW-1:0]  cb_addr,
  input  sample_t           cb_wdata,
  // configuration
  input  logic [N0_W-1:0]   inv_n0,
  input  approx_e           approx_mode,
  input  coef_t             dinv [K][K],
  input  logic [ITER_W-1:0] max_iter,
  input  logic              en_et,
  input  logic              en_adapt,
  input  logic [SH_W-1:0]   alpha_sh,
  input  logic [SH_W-1:0]   beta_sh,
  input  logic [SH_W-1:0]   eps_sh,
  // frame input
  input  logic              in_valid,
  output logic              in_ready,
  input  cplx_t             in_y [K],
  // frame output
  output logic              out_valid,
  output sym_t              out_sym [J],
  output logic [ITER_W-1:0] out_iters,
  output logic              out_early
);

  // ---------------------------------------------------------------- control
  logic clr, front_vld, init_done, rn_start, rn_wr, first;
  logic all_stable, ln_start, ln_wr, judge_start, done;
  logic [J-1:0] judge_vld;
  logic [NE-1:0] rn_vld, ln_vld;

  decoder_ctrl u_ctrl (
    .clk, .rst_n,
    .in_valid_i    (in_valid),
    .in_ready_o    (in_ready),
    .max_iter_i    (max_iter),
    .et_i          (en_et),
    .clr_o         (clr),
    .front_vld_o   (front_vld),
    .init_done_i   (init_done),
    .rn_start_o    (rn_start),
    .rn_done_i     (rn_vld[0]),
    .rn_wr_o       (rn_wr),
    .first_o       (first),
    .all_stable_i  (all_stable),
    .ln_start_o    (ln_start),
    .ln_done_i     (ln_vld[0]),
    .ln_wr_o       (ln_wr),
    .judge_start_o (judge_start),
    .judge_done_i  (judge_vld[0]),
    .done_o        (done),
    .iters_o       (out_iters),
    .early_o       (out_early)
  );

  assign out_valid = done;

  // --------------------------------------------------------------- codebook
  sample_t cb [CB_N];

  codebook_mem u_cb (
    .clk, .rst_n,
    .we_i    (cb_we),
    .addr_i  (cb_addr),
    .wdata_i (cb_wdata),
    .cb_o    (cb)
  );

  // -------------------------------------------- noise reduction and init
  logic  nr_vld;
  cplx_t y_nr [K];
  belief_t p [K][NCOMB];

  noise_reduction u_nr (
    .clk, .rst_n,
    .vld_i  (front_vld),
    .y_i    (in_y),
    .dinv_i (dinv),
    .vld_o  (nr_vld),
    .y_o    (y_nr)
  );

  if (FOLDED_INIT) begin : g_init
    folded_init_unit u_init (
      .clk, .rst_n,
      .vld_i    (nr_vld),
      .y_i      (y_nr),
      .cb_i     (cb),
      .inv_n0_i (inv_n0),
      .vld_o    (init_done),
      .p_o      (p)
    );
  end else begin : g_init
    init_unit u_init (
      .clk, .rst_n,
      .vld_i    (nr_vld),
      .y_i      (y_nr),
      .cb_i     (cb),
      .inv_n0_i (inv_n0),
      .mode_i   (approx_mode),
      .vld_o    (init_done),
      .p_o      (p)
    );
  end

  // ------------------------------------------------- iterative message passing
  bvec_t la [NE], lb [NE];           // from the LN memory
  bvec_t r_new [NE], r_adj [NE];     // RN unit outputs, after self-adaption
  bvec_t r_old [NE], to_ln [NE];     // RN memory views
  bvec_t to_sj [J][N];
  bvec_t l_new [NE];
  logic [M-1:0] stable [NE], up [NE], down [NE];

  for (genvar e = 0; e < NE; e++) begin : g_edge
    rn_update_unit #(.SLOT(e % DF)) u_rn (
      .clk, .rst_n,
      .vld_i (rn_start),
      .p_i   (p[e / DF]),
      .la_i  (la[e]),
      .lb_i  (lb[e]),
      .vld_o (rn_vld[e]),
      .r_o   (r_new[e])
    );

    convergence_unit u_conv (
      .first_i    (first),
      .adapt_i    (en_adapt),
      .alpha_sh_i (alpha_sh),
      .beta_sh_i  (beta_sh),
      .eps_sh_i   (eps_sh),
      .v_i        (r_new[e]),
      .vt_i       (r_old[e]),
      .v_o        (r_adj[e]),
      .stable_o   (stable[e]),
      .up_o       (up[e]),
      .down_o     (down[e])
    );

    ln_update_unit u_ln (
      .clk, .rst_n,
      .vld_i (ln_start),
      .v_i   (to_ln[e]),
      .vld_o (ln_vld[e]),
      .l_o   (l_new[e])
    );
  end

  rn_to_ln_network u_rn_net (
    .clk, .rst_n,
    .clr_i        (clr),
    .wr_i         (rn_wr),
    .wdata_i      (r_adj),
    .wstable_i    (stable),
    .mem_o        (r_old),
    .to_ln_o      (to_ln),
    .to_sj_o      (to_sj),
    .all_stable_o (all_stable)
  );

  ln_to_rn_network u_ln_net (
    .clk, .rst_n,
    .clr_i   (clr),
    .wr_i    (ln_wr),
    .wdata_i (l_new),
    .la_o    (la),
    .lb_o    (lb)
  );

  // Self-adaption activity of the pass being written (observation only).
  logic adapt_up_any, adapt_down_any;
  always_comb begin
    adapt_up_any   = 1'b0;
    adapt_down_any = 1'b0;
    for (int e = 0; e < NE; e++) begin
      adapt_up_any   |= rn_wr && (|up[e]);
      adapt_down_any |= rn_wr && (|down[e]);
    end
  end

  // ------------------------------------------------------- symbol judgement
  for (genvar j = 0; j < J; j++) begin : g_user
    symbol_judge_unit u_sj (
      .clk, .rst_n,
      .vld_i (judge_start),
      .r0_i  (to_sj[j][0]),
      .r1_i  (to_sj[j][1]),
      .vld_o (judge_vld[j]),
      .sym_o (out_sym[j])
    );
  end

  // -------------------------------------------------------------- assertions
  // The codebook may only be rewritten between frames.
  a_cb_idle: assert property (@(posedge clk) disable iff (!rst_n)
    cb_we |-> in_ready)
    else $error("codebook written while a frame is being decoded");
  // All edge units run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (rn_vld == '0 || rn_vld == '1) && (ln_vld == '0 || ln_vld == '1) &&
    (judge_vld == '0 || judge_vld == '1))
    else $error("edge units out of step");
  // A result is only delivered for a frame in flight.
  a_done_busy: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> !in_ready);

endmodule
