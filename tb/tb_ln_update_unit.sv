// tb_ln_update_unit: streams random belief vectors (including the extreme
// values) and checks l = sat(v - max(v)) one cycle later, plus the valid
// pipeline.
module tb_ln_update_unit;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vld_i = 0, vld_o;
  bvec_t v, l;
  int checks = 0, failures = 0, n_sat = 0;

  ln_update_unit dut (.clk, .rst_n, .vld_i, .v_i(v), .vld_o, .l_o(l));

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
    int pv [RM];
    bit pvld;
    v = '0;
    pvld = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 3000; n++) begin
      int mx;
      for (int m = 0; m < M; m++) begin
        int x;
        x = $urandom_range(0, 65535) - 32768;
        if (n % 5 == 1) x = ($urandom_range(0, 1) != 0) ? 32767 : -32768;
        if (n % 5 == 2) x = x / 256;
        v[m] = belief_t'(x);
        pv[m] = x;
      end
      vld_i = ($urandom_range(0, 3) != 0);
      pvld = vld_i;
      @(posedge clk); #1;
      check(vld_o == pvld, "valid after one cycle");
      if (pvld) begin
        mx = pv[0];
        for (int m = 1; m < M; m++) if (pv[m] > mx) mx = pv[m];
        for (int m = 0; m < M; m++) begin
          n_sat += (pv[m] - mx < -32768);
          check(int'(l[m]) == sat16(longint'(pv[m] - mx)),
                $sformatf("n %0d m %0d: %0d exp %0d", n, m, l[m], sat16(longint'(pv[m] - mx))));
        end
      end
    end
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
