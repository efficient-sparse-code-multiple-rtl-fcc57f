// tb_rn_to_ln_network: writes random beliefs and stability bits into the RN
// memory and checks the routing to the LN units (each edge receives the
// other edge of the same user), the routing to the symbol judge units, the
// all-stable reduction and the clear. Expected routing is derived from the
// factor graph matrix in the reference package.
module tb_rn_to_ln_network;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, wr = 0;
  bvec_t wdata [NE], mem [NE], to_ln [NE], to_sj [J][N];
  logic [M-1:0] wst [NE];
  logic all_st;
  int checks = 0, failures = 0, n_all = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  rn_to_ln_network dut (.clk, .rst_n, .clr_i(clr), .wr_i(wr), .wdata_i(wdata), .wstable_i(wst),
                        .mem_o(mem), .to_ln_o(to_ln), .to_sj_o(to_sj), .all_stable_o(all_st));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bvec_t exp_mem [NE];
    logic [M-1:0] exp_st [NE];
    bit exp_all;
    int c0;
    for (int e = 0; e < NE; e++) begin wdata[e] = '0; wst[e] = '0; exp_mem[e] = '0; exp_st[e] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 400; n++) begin
      int op;
      op = $urandom_range(0, 9);
      for (int e = 0; e < NE; e++) begin
        for (int m = 0; m < M; m++) wdata[e][m] = belief_t'($urandom_range(0, 65535));
        wst[e] = (n % 3 == 0) ? '1 : M'($urandom_range(0, 15) | (($urandom_range(0, 3) != 0) ? 15 : 0));
      end
      // every third access: all stable except one bit of one edge
      if (n % 3 == 1) begin
        for (int e = 0; e < NE; e++) wst[e] = '1;
        wst[$urandom_range(0, NE-1)][$urandom_range(0, M-1)] = 1'b0;
      end
      clr = (op == 0);
      wr  = (op >= 3);
      c0 = cyc;
      @(posedge clk); #1;
      check(cyc == c0 + 1, "one cycle per access");
      if (clr) for (int e = 0; e < NE; e++) begin exp_mem[e] = '0; exp_st[e] = '0; end
      else if (wr) for (int e = 0; e < NE; e++) begin exp_mem[e] = wdata[e]; exp_st[e] = wst[e]; end
      exp_all = 1;
      for (int e = 0; e < NE; e++) exp_all &= &exp_st[e];
      n_all += exp_all;
      check(all_st == exp_all, "all-stable reduction");
      for (int e = 0; e < NE; e++) check(mem[e] == exp_mem[e], "memory contents");
      for (int j = 0; j < J; j++) begin
        int e0, e1;
        e0 = r_edge(j, 0);
        e1 = r_edge(j, 1);
        check(to_ln[e0] == exp_mem[e1] && to_ln[e1] == exp_mem[e0],
              $sformatf("user %0d: partner routing", j));
        check(to_sj[j][0] == exp_mem[e0] && to_sj[j][1] == exp_mem[e1],
              $sformatf("user %0d: judge routing", j));
      end
    end
    check(n_all > 0, "all-stable seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
