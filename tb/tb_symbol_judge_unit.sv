// tb_symbol_judge_unit: streams belief pairs (random, with forced ties and
// saturating sums) and checks the decided codeword index three cycles later
// against the reference (sum, first maximum wins).
module tb_symbol_judge_unit;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  localparam int NV = 2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vld_i = 0, vld_o;
  bvec_t r0, r1;
  sym_t sym;
  int checks = 0, failures = 0, n_tie = 0;
  int a0 [NV][RM], a1 [NV][RM];
  bit av [NV];

  symbol_judge_unit dut (.clk, .rst_n, .vld_i, .r0_i(r0), .r1_i(r1), .vld_o, .sym_o(sym));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NV; n++) begin
      av[n] = ($urandom_range(0, 4) != 0);
      for (int m = 0; m < RM; m++) begin
        a0[n][m] = $urandom_range(0, 65535) - 32768;
        a1[n][m] = $urandom_range(0, 65535) - 32768;
        if (n % 4 == 1) begin a0[n][m] = $urandom_range(0, 3); a1[n][m] = 0; end
        if (n % 4 == 2) begin a0[n][m] = 32767 - $urandom_range(0, 2); a1[n][m] = 30000; end
      end
    end
    r0 = '0; r1 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < NV + 3; n++) begin
      if (n < NV) begin
        for (int m = 0; m < M; m++) begin r0[m] = belief_t'(a0[n][m]); r1[m] = belief_t'(a1[n][m]); end
        vld_i = av[n];
      end else vld_i = 0;
      @(posedge clk); #1;
      if (n >= 2) begin
        int v, e;
        int q [RM];
        int x0 [RM], x1 [RM];
        int cnt;
        v = n - 2;
        x0 = a0[v];
        x1 = a1[v];
        e = ref_judge(x0, x1);
        check(vld_o == (v < NV && av[v]), "valid after three cycles");
        if (v < NV && av[v]) begin
          cnt = 0;
          for (int m = 0; m < RM; m++) if (sat16(longint'(x0[m]) + x1[m]) == sat16(longint'(x0[e]) + x1[e])) cnt++;
          n_tie += (cnt > 1);
          check(int'(sym) == e, $sformatf("vec %0d: sym %0d exp %0d", v, sym, e));
        end
      end else check(!vld_o, "no early valid");
    end
    check(n_tie > 0, "ties exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
