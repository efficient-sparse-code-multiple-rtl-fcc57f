// decoder_ctrl: frame sequencer of the decoder.
//
// Runs one frame at a time through the paper's four steps: initialization,
// then iterations of resource-node update and layer-node update, then symbol
// judgement. Each iteration is an RN pass (all 12 edges in parallel) whose
// result is written, together with its stability matrix, into the RN
// memory, followed by an LN pass written into the LN memory. After every RN
// pass the controller decides:
//   * stop if the iteration count has reached max_iter_i (I_max), or
//   * stop early if et_i is set and the stability matrix is all ones;
//   * otherwise run the LN pass and the next RN pass.
// A stopped frame skips its last LN pass and goes to symbol judgement.
// max_iter_i = 0 is treated as 1.
//
// Handshake: in_ready_o is high in IDLE; a frame starts on a cycle with
// in_valid_i && in_ready_o, which also pulses clr_o to reset the LN memory
// (uniform prior) and the RN memory. done_o pulses for one cycle when the
// judge units deliver; iters_o and early_o are valid from then on.
//
// Timing (cycles after the start cycle t0): the RN pass starts when the
// front end (noise reduction + initialization) reports valid, each RN pass
// takes RN_LAT cycles plus one decision cycle, each LN pass two cycles
// (unit + write). For the units of this design this gives a latency of
// 8*I + 5 cycles from the start cycle to done_o for I iterations.
module decoder_ctrl
  import scma_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  logic [ITER_W-1:0] max_iter_i,
  input  logic              et_i,
  output logic              clr_o,        // frame start
  output logic              front_vld_o,  // start noise reduction + init
  input  logic              init_done_i,  // P memory valid
  output logic              rn_start_o,
  input  logic              rn_done_i,    // RN units' output valid
  output logic              rn_wr_o,
  output logic              first_o,      // first iteration of the frame
  input  logic              all_stable_i, // stability matrix (RN memory)
  output logic              ln_start_o,
  input  logic              ln_done_i,
  output logic              ln_wr_o,
  output logic              judge_start_o,
  input  logic              judge_done_i,
  output logic              done_o,
  output logic [ITER_W-1:0] iters_o,
  output logic              early_o
);

  typedef enum logic [2:0] {
    S_IDLE, S_FRONT, S_RN_WAIT, S_DECIDE, S_LN_WAIT, S_RN_ISSUE, S_J_WAIT
  } state_e;

  state_e            state_q;
  logic [ITER_W-1:0] iter_q;
  logic [ITER_W-1:0] imax;
  logic              first_q;
  logic              early_q;
  logic              stop_cap, stop_et;

  assign imax     = (max_iter_i == '0) ? ITER_W'(1) : max_iter_i;
  assign stop_cap = (iter_q >= imax);
  assign stop_et  = et_i && all_stable_i;

  // outputs decoded from the state
  assign in_ready_o    = (state_q == S_IDLE);
  assign clr_o         = in_valid_i && in_ready_o;
  assign front_vld_o   = clr_o;
  assign rn_start_o    = ((state_q == S_FRONT) && init_done_i) || (state_q == S_RN_ISSUE);
  assign rn_wr_o       = (state_q == S_RN_WAIT) && rn_done_i;
  assign first_o       = first_q;
  assign ln_start_o    = (state_q == S_DECIDE) && !(stop_cap || stop_et);
  assign judge_start_o = (state_q == S_DECIDE) &&  (stop_cap || stop_et);
  assign ln_wr_o       = (state_q == S_LN_WAIT) && ln_done_i;
  assign done_o        = (state_q == S_J_WAIT) && judge_done_i;
  assign iters_o       = iter_q;
  assign early_o       = early_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      iter_q  <= '0;
      first_q <= 1'b0;
      early_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE:
          if (clr_o) begin
            state_q <= S_FRONT;
            iter_q  <= '0;
            first_q <= 1'b1;
            early_q <= 1'b0;
          end
        S_FRONT:
          if (init_done_i) state_q <= S_RN_WAIT;
        S_RN_WAIT:
          if (rn_done_i) begin
            state_q <= S_DECIDE;
            iter_q  <= iter_q + 1'b1;
          end
        S_DECIDE: begin
          first_q <= 1'b0;
          if (stop_cap || stop_et) begin
            state_q <= S_J_WAIT;
            early_q <= !stop_cap;
          end else begin
            state_q <= S_LN_WAIT;
          end
        end
        S_LN_WAIT:
          if (ln_done_i) state_q <= S_RN_ISSUE;
        S_RN_ISSUE:
          state_q <= S_RN_WAIT;
        S_J_WAIT:
          if (judge_done_i) state_q <= S_IDLE;
        default:
          state_q <= S_IDLE;
      endcase
    end
  end

endmodule
