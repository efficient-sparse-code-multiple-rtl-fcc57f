// tb_folded_init_branch: offers random combinations (random y, codeword
// parts and 1/N0) to the folded branch, sometimes back to back every 7
// cycles, sometimes with idle periods, and compares every result with the
// exact Max-Log initial belief computed here. Checks the 39-cycle latency,
// the one-per-7-cycles acceptance and the result count.
module tb_folded_init_branch;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  localparam int NV = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vld_i = 0, in_ready, vld_o;
  cplx_t y;
  cplx_t x [DF];
  logic [N0_W-1:0] inv_n0;
  belief_t p;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  folded_init_branch dut (.clk, .rst_n, .vld_i, .in_ready_o(in_ready), .y_i(y), .x_i(x),
                          .inv_n0_i(inv_n0), .vld_o, .p_o(p));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_p [NV], exp_t [NV];
  int n_in = 0, n_out = 0, n_sat = 0, n_b2b = 0, last_t = -100;

  // expected value of one combination
  function automatic int ref_p(input int yr, input int yi, input int xr [3], input int xi [3], input int inv);
    longint dr, di, mag, sc;
    dr = yr - xr[0] - xr[1] - xr[2];
    di = yi - xi[0] - xi[1] - xi[2];
    mag = dr * dr + di * di;
    sc = (mag * inv) >>> 8;
    if (sc > 32768) return -32768;
    return int'(-sc);
  endfunction

  // output monitor (falling edge: vld_o and the cycle count are settled)
  always @(negedge clk) if (rst_n && vld_o) begin
    if (n_out < n_in) begin
      check(int'(p) == exp_p[n_out], $sformatf("result %0d: %0d exp %0d", n_out, p, exp_p[n_out]));
      check(cyc - exp_t[n_out] == 39, $sformatf("result %0d: latency %0d", n_out, cyc - exp_t[n_out]));
      n_sat += (exp_p[n_out] == -32768);
    end else check(0, "unexpected result");
    n_out++;
  end

  initial begin
    y = '0;
    for (int u = 0; u < DF; u++) x[u] = '0;
    inv_n0 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // batches: 1/N0 is a frame constant, changed only once the branch is empty
    while (n_in < NV) begin
      inv_n0 = N0_W'($urandom_range(1, 600));
      for (int c = 0; c < 16 && n_in < NV; ) begin
        @(posedge clk); #1;
        vld_i = 0;
        if (in_ready && $urandom_range(0, 3) != 0) begin
          int xr [3], xi [3];
          y.re = sample_t'($urandom_range(0, 255));
          y.im = sample_t'($urandom_range(0, 255));
          for (int u = 0; u < DF; u++) begin
            x[u].re = sample_t'($urandom_range(0, 255));
            x[u].im = sample_t'($urandom_range(0, 255));
            if (n_in % 5 != 0) begin      // mostly small values: unsaturated beliefs
              x[u].re = x[u].re >>> 3;
              x[u].im = x[u].im >>> 3;
            end
            xr[u] = int'(x[u].re);
            xi[u] = int'(x[u].im);
          end
          if (n_in % 5 != 0) begin y.re = y.re >>> 3; y.im = y.im >>> 3; end
          vld_i = 1;
          exp_p[n_in] = ref_p(int'(y.re), int'(y.im), xr, xi, int'(inv_n0));
          exp_t[n_in] = cyc;
          if (cyc - last_t == 7) n_b2b++;
          last_t = cyc;
          n_in++;
          c++;
        end else if (in_ready) begin
          check((cyc - last_t) % 7 == 0, "ready once every 7 cycles");
        end
      end
      @(posedge clk); #1;
      vld_i = 0;
      repeat (45) @(posedge clk);
      #1;
      check(n_out == n_in, "batch drained");
    end
    repeat (50) @(posedge clk);
    check(n_out == NV, $sformatf("results %0d of %0d", n_out, NV));
    check(n_sat > 0, "saturation exercised");
    check(n_b2b > 0, "back-to-back combinations exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
