// tb_rn_update_unit: one unit per slot (0, 1, 2) fed a new random input set
// every cycle; each output is compared, five cycles later, with the
// reference max-sum over the 16 combinations of the two other users.
// Includes extreme values to exercise saturation.
module tb_rn_update_unit;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  localparam int NV = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vld_i = 0;
  logic [2:0] vld_o;
  belief_t p_i [NCOMB];
  bvec_t la [3], lb [3], r_o [3];
  int checks = 0, failures = 0;

  for (genvar s = 0; s < 3; s++) begin : g_slot
    rn_update_unit #(.SLOT(s)) dut (.clk, .rst_n, .vld_i, .p_i, .la_i(la[s]), .lb_i(lb[s]),
                                    .vld_o(vld_o[s]), .r_o(r_o[s]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pv [NV][64];
  int lav [NV][3][RM], lbv [NV][3][RM];

  function automatic int rnd_bel(input int n);
    if (n % 10 == 9) return ($urandom_range(0, 1) != 0) ? 32767 : -32768;
    if (n % 3 == 0)  return $urandom_range(0, 65535) - 32768;
    return -$urandom_range(0, 3000);
  endfunction

  initial begin
    for (int n = 0; n < NV; n++)
      for (int c = 0; c < 64; c++) pv[n][c] = rnd_bel(n);
    for (int n = 0; n < NV; n++)
      for (int s = 0; s < 3; s++)
        for (int m = 0; m < RM; m++) begin
          lav[n][s][m] = rnd_bel(n);
          lbv[n][s][m] = rnd_bel(n);
        end
    for (int c = 0; c < NCOMB; c++) p_i[c] = '0;
    for (int s = 0; s < 3; s++) begin la[s] = '0; lb[s] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < NV + 5; n++) begin
      if (n < NV) begin
        for (int c = 0; c < NCOMB; c++) p_i[c] = belief_t'(pv[n][c]);
        for (int s = 0; s < 3; s++)
          for (int m = 0; m < M; m++) begin
            la[s][m] = belief_t'(lav[n][s][m]);
            lb[s][m] = belief_t'(lbv[n][s][m]);
          end
      end
      vld_i = (n < NV);
      @(posedge clk); #1;
      if (n >= 4) begin
        int v;
        v = n - 4;
        for (int s = 0; s < 3; s++) begin
          int r [RM];
          int pk [64];
          int a [RM], b [RM];
          pk = pv[v];
          a = lav[v][s];
          b = lbv[v][s];
          ref_rn(s, pk, a, b, r);
          check(vld_o[s] == (v < NV), "vld_o five cycles after vld_i");
          if (v < NV)
            for (int m = 0; m < M; m++)
              check(int'(r_o[s][m]) == r[m],
                    $sformatf("vec %0d slot %0d m %0d: %0d exp %0d", v, s, m, r_o[s][m], r[m]));
        end
      end else begin
        check(vld_o == 3'b000, "no output before five cycles");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
