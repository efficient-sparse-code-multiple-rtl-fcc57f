// folded_init_branch: one branch of the initialization unit, folded by a
// factor of 7 onto a single adder and a single multiplier.
//
// The branch computes, for one resource and one codeword combination, the
// exact Max-Log initial belief
//     P = -( (y_re - x1_re - x2_re - x3_re)^2 + (y_im - x1_im - x2_im - x3_im)^2 ) / N0
// through twelve operations: inputs 1 (real) and 2 (imag), adders 3, 4, 5
// (real chain), 7, 8, 9 (imaginary chain) and 6 (sum of squares), and
// multipliers 10 and 12 (squares) and 11 (scaling by 1/N0).
//
// Folding follows the paper's folding sets and folding equations. With
// folding factor 7, operation u of a set runs in time slot u of every
// 7-cycle period:
//     inputs      slot 0: node 1, slot 1: node 2
//     adder       slots 0..6: nodes 3, 4, 5, 6, 7, 8, 9
//     multiplier  slots 0..2: nodes 10, 11, 12
// The paper's delays D_F(1->3)=0, (3->4)=7, (4->5)=7, (2->7)=3, (7->8)=7,
// (8->9)=7, (5->10)=4, (10->6)=8, (6->11)=4, (9->12)=2, (12->6)=6 all follow
// from an adder with one pipeline register, a multiplier with two, and one
// delay on every internal edge of the unfolded data-flow graph. This module
// builds exactly that: the adder result register feeds a tapped delay line
// (taps 2, 4, 7), the multiplier result register feeds another (taps 6, 8),
// and the time-shared input bus a third (tap 3). An edge with D_F = d reads
// tap d of its source's line. The delay lines hold 7 + 8 + 3 = 18 words; the
// paper minimises the storage further to 8 registers by lifetime analysis
// and forward-backward allocation, which is not reproduced here.
//
// Interface and timing: in_ready_o is high in slot 0. A combination is
// accepted with vld_i in that cycle: y_i and the three codeword parts x_i.
// Successive combinations may be offered every 7 cycles. Because the chains
// are spread over several periods (node 4 works on the previous
// combination, node 5 on the one before), the module keeps the last three
// accepted combinations. Node 11's product is in the multiplier register 38
// cycles after the accepting cycle; it is saturated into p_o, so vld_o and
// p_o follow 39 cycles after acceptance. p_o holds until the next result.
// The subtraction of the codeword parts (the adders take y - x) follows
// Eq. (log1); the figure prints the adder symbol only. The 1/N0 format
// (Q8.8) and the saturation of P to 16 bits match init_unit, which computes
// the same value unfolded.
module folded_init_branch
  import scma_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            vld_i,
  output logic            in_ready_o,
  input  cplx_t           y_i,
  input  cplx_t           x_i [DF],
  input  logic [N0_W-1:0] inv_n0_i,
  output logic            vld_o,
  output belief_t         p_o
);

  localparam int FOLD   = 7;                 // folding factor
  localparam int LAT    = 38;                // acceptance to node 11's product
  localparam int A_W    = 24;                // adder width
  localparam int P_W    = 2 * A_W;           // product width
  localparam int LA_LEN = 7;                 // adder delay line
  localparam int LM_LEN = 8;                 // multiplier delay line
  localparam int LI_LEN = 3;                 // input delay line

  logic [2:0] slot_q;
  cplx_t      hist_y  [DF];                  // y of the last three combinations
  cplx_t      hist_x  [DF][DF];              // codeword parts, [age][user]

  logic signed [A_W-1:0] add_a, add_b, add_q;
  logic                  add_sub;
  logic signed [A_W-1:0] la_q [LA_LEN];
  logic signed [A_W-1:0] mul_a, mul_b;
  logic signed [P_W-1:0] mul_q1, mul_q2;
  logic signed [P_W-1:0] lm_q [LM_LEN];
  logic signed [A_W-1:0] in_bus;
  logic signed [A_W-1:0] li_q [LI_LEN];
  logic [LAT-1:0]        vld_sr;

  assign in_ready_o = (slot_q == 3'd0);

  // time-shared input: node 1 (real) in slot 0, node 2 (imag) in slot 1
  always_comb begin
    if (slot_q == 3'd0)      in_bus = A_W'(y_i.re);
    else if (slot_q == 3'd1) in_bus = A_W'(hist_y[0].im);
    else                     in_bus = '0;
  end

  // the adder: operand switches per slot
  always_comb begin
    add_a   = '0;
    add_b   = '0;
    add_sub = 1'b1;
    unique case (slot_q)
      3'd0: begin add_a = in_bus;             add_b = A_W'(x_i[0].re);       end // node 3
      3'd1: begin add_a = la_q[7-1];          add_b = A_W'(hist_x[1][1].re); end // node 4
      3'd2: begin add_a = la_q[7-1];          add_b = A_W'(hist_x[2][2].re); end // node 5
      3'd3: begin add_a = A_W'(lm_q[8-1]);    add_b = A_W'(lm_q[6-1]);
                  add_sub = 1'b0;                                             end // node 6
      3'd4: begin add_a = li_q[3-1];          add_b = A_W'(hist_x[0][0].im); end // node 7
      3'd5: begin add_a = la_q[7-1];          add_b = A_W'(hist_x[1][1].im); end // node 8
      3'd6: begin add_a = la_q[7-1];          add_b = A_W'(hist_x[2][2].im); end // node 9
      default: ;
    endcase
  end

  // the multiplier: squares in slots 0 and 2, scaling in slot 1
  always_comb begin
    mul_a = '0;
    mul_b = '0;
    unique case (slot_q)
      3'd0: begin mul_a = la_q[4-1]; mul_b = la_q[4-1];                   end // node 10
      3'd1: begin mul_a = la_q[4-1]; mul_b = A_W'($signed({1'b0, inv_n0_i})); end // node 11
      3'd2: begin mul_a = la_q[2-1]; mul_b = la_q[2-1];                   end // node 12
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q <= '0;
      hist_y <= '{default: '0};
      hist_x <= '{default: '0};
      add_q  <= '0;
      la_q   <= '{default: '0};
      mul_q1 <= '0;
      mul_q2 <= '0;
      lm_q   <= '{default: '0};
      li_q   <= '{default: '0};
      vld_sr <= '0;
    end else begin
      slot_q <= (slot_q == 3'(FOLD - 1)) ? 3'd0 : slot_q + 3'd1;
      if (slot_q == 3'd0) begin
        hist_y[0] <= y_i;
        hist_y[1] <= hist_y[0];
        hist_y[2] <= hist_y[1];
        hist_x[0] <= x_i;
        hist_x[1] <= hist_x[0];
        hist_x[2] <= hist_x[1];
      end
      add_q  <= add_sub ? (add_a - add_b) : (add_a + add_b);
      la_q[0] <= add_q;
      for (int i = 1; i < LA_LEN; i++) la_q[i] <= la_q[i-1];
      mul_q1 <= mul_a * mul_b;
      mul_q2 <= mul_q1;
      lm_q[0] <= mul_q2;
      for (int i = 1; i < LM_LEN; i++) lm_q[i] <= lm_q[i-1];
      li_q[0] <= in_bus;
      for (int i = 1; i < LI_LEN; i++) li_q[i] <= li_q[i-1];
      vld_sr <= {vld_sr[LAT-2:0], vld_i && in_ready_o};
    end
  end

  // output: node 11 leaves the multiplier register in slot 3
  logic signed [P_W-1:0] scaled;
  assign scaled = mul_q2 >>> N0_F;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      p_o   <= '0;
    end else begin
      vld_o <= vld_sr[LAT-1];
      if (vld_sr[LAT-1])
        p_o <= (scaled > P_W'(2**(BEL_W-1))) ? BEL_MIN : belief_t'(-scaled);
    end
  end

endmodule
