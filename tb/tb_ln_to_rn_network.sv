// tb_ln_to_rn_network: writes random LN messages and checks that every RN
// edge (resource k, slot s) receives the messages of the two other users of
// resource k in ascending slot order; also checks the clear to zero (the
// uniform prior in the log domain).
module tb_ln_to_rn_network;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, wr = 0;
  bvec_t wdata [NE], la [NE], lb [NE];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  ln_to_rn_network dut (.clk, .rst_n, .clr_i(clr), .wr_i(wr), .wdata_i(wdata), .la_o(la), .lb_o(lb));

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
    int c0;
    for (int e = 0; e < NE; e++) begin wdata[e] = '0; exp_mem[e] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int e = 0; e < NE; e++) check(la[e] == '0 && lb[e] == '0, "reset value");
    for (int n = 0; n < 300; n++) begin
      int op;
      op = $urandom_range(0, 9);
      for (int e = 0; e < NE; e++)
        for (int m = 0; m < M; m++) wdata[e][m] = belief_t'($urandom_range(0, 65535));
      clr = (op == 0);
      wr  = (op >= 3);
      c0 = cyc;
      @(posedge clk); #1;
      check(cyc == c0 + 1, "one cycle per access");
      if (clr) for (int e = 0; e < NE; e++) exp_mem[e] = '0;
      else if (wr) exp_mem = wdata;
      for (int k = 0; k < RK; k++)
        for (int s = 0; s < RDF; s++) begin
          int o [2];
          int n2;
          n2 = 0;
          for (int t = 0; t < RDF; t++) if (t != s) begin o[n2] = t; n2++; end
          check(la[k*RDF+s] == exp_mem[k*RDF+o[0]] && lb[k*RDF+s] == exp_mem[k*RDF+o[1]],
                $sformatf("resource %0d slot %0d routing", k, s));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
