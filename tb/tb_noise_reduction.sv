// tb_noise_reduction: random samples and matrices (plus identity and the
// paper's example inverse scale) against the reference D^-1 product;
// checks the one-cycle latency and that the output holds without vld_i.
module tb_noise_reduction;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vld_i = 0, vld_o;
  cplx_t y_i [K], y_o [K];
  coef_t dinv [K][K];
  int checks = 0, failures = 0;

  noise_reduction dut (.clk, .rst_n, .vld_i, .y_i, .dinv_i(dinv), .vld_o, .y_o);

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

  initial begin
    y_t y, ye;
    dm_t dm;
    for (int i = 0; i < K; i++) begin
      y_i[i] = '0;
      for (int k = 0; k < K; k++) dinv[i][k] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < K; i++) begin
        y[i][0] = $urandom_range(0, 255) - 128;
        y[i][1] = $urandom_range(0, 255) - 128;
        for (int k = 0; k < K; k++)
          if (n < 20)       dm[i][k] = (i == k) ? 4096 : 0;
          else if (n < 150) dm[i][k] = $urandom_range(0, 12000) - 6000;
          else              dm[i][k] = $urandom_range(0, 65535) - 32768;
      end
      for (int i = 0; i < K; i++) begin
        y_i[i].re = sample_t'(y[i][0]);
        y_i[i].im = sample_t'(y[i][1]);
        for (int k = 0; k < K; k++) dinv[i][k] = coef_t'(dm[i][k]);
      end
      ref_nr(y, dm, ye);
      vld_i <= 1;
      @(posedge clk);
      vld_i <= 0;
      #1;
      check(vld_o, "vld_o one cycle after vld_i");
      for (int i = 0; i < K; i++) begin
        check(int'(y_o[i].re) == ye[i][0], $sformatf("vec %0d re[%0d] %0d exp %0d", n, i, y_o[i].re, ye[i][0]));
        check(int'(y_o[i].im) == ye[i][1], $sformatf("vec %0d im[%0d]", n, i));
      end
      if (n < 20) check(int'(y_o[0].re) == y[0][0], "identity passes the sample");
      // without vld_i the output holds
      y_i[0].re = ~y_i[0].re;
      @(posedge clk); #1;
      check(!vld_o, "vld_o drops");
      check(int'(y_o[0].re) == ye[0][0], "output holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
