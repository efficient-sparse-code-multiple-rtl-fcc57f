// tb_scma_decoder_folded: end-to-end test of the decoder built with the
// folded initialization (FOLDED_INIT = 1: four folded branches, one adder
// and one multiplier each, instead of 256 parallel branches).
//
// Same channel model, reference model and checks as tb_scma_decoder, but
// always in the exact Max-Log mode (the folded branch computes the exact
// equation) and with fewer frames, since each frame now spends about 490
// cycles in the initialization. The latency check becomes
// 8*I + 2 + L_init with L_init, the folded initialization time, between
// 482 and 488 cycles depending on the branch slot at the frame start.
// Iteration cap, both self-adaption directions, noise reduction and input
// back-pressure must each occur; early termination is covered by the
// unfolded test (it is independent of how P is computed).
module tb_scma_decoder_folded;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  localparam int NFRAMES = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              cb_we = 0;
  logic [CB_AW-1:0]  cb_addr = '0;
  sample_t           cb_wdata = '0;
  logic [N0_W-1:0]   inv_n0 = 16'd16;
  approx_e           approx_mode = APPROX3;
  coef_t             dinv [K][K];
  logic [ITER_W-1:0] max_iter = 3'd3;
  logic              en_et = 1, en_adapt = 1;
  logic [SH_W-1:0]   alpha_sh = 4'd3, beta_sh = 4'd3, eps_sh = 4'd4;
  logic              in_valid = 0, in_ready;
  cplx_t             in_y [K];
  logic              out_valid;
  sym_t              out_sym [J];
  logic [ITER_W-1:0] out_iters;
  logic              out_early;

  scma_decoder #(.FOLDED_INIT(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  int n_early = 0, n_cap = 0, n_up = 0, n_down = 0, n_nr = 0, n_stall = 0;
  int n_mode [4] = '{0, 0, 0, 0};
  longint cyc = 0;
  int l_init, l_min = 1000000, l_max = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.adapt_up_any)   n_up++;
    if (dut.adapt_down_any) n_down++;
    if (in_valid && !in_ready) n_stall++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // D and its inverse (Q3.12)
  real dmat [K][K];
  dm_t dinv_paper, dinv_id;

  function automatic void invert(input real a_in [K][K], output dm_t q);
    real a [K][2*K];
    for (int i = 0; i < K; i++)
      for (int c = 0; c < 2*K; c++)
        a[i][c] = (c < K) ? a_in[i][c] : ((c - K == i) ? 1.0 : 0.0);
    for (int c = 0; c < K; c++) begin
      real f;
      int piv;
      piv = c;
      for (int r = c + 1; r < K; r++)
        if ((a[r][c] < 0 ? -a[r][c] : a[r][c]) > (a[piv][c] < 0 ? -a[piv][c] : a[piv][c])) piv = r;
      for (int cc = 0; cc < 2*K; cc++) begin
        real t;
        t = a[c][cc];
        a[c][cc] = a[piv][cc];
        a[piv][cc] = t;
      end
      f = a[c][c];
      for (int cc = 0; cc < 2*K; cc++) a[c][cc] = a[c][cc] / f;
      for (int r = 0; r < K; r++)
        if (r != c) begin
          real g;
          g = a[r][c];
          for (int cc = 0; cc < 2*K; cc++) a[r][cc] = a[r][cc] - g * a[c][cc];
        end
    end
    for (int i = 0; i < K; i++)
      for (int k = 0; k < K; k++) begin
        real v;
        v = a[i][K+k] * 4096.0;
        q[i][k] = $rtoi(v + (v >= 0 ? 0.5 : -0.5));
      end
  endfunction

  // approximately Gaussian noise, standard deviation sigma
  function automatic real noise(input real sigma);
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += $itor($urandom_range(0, 65535)) / 65536.0;
    return (s - 6.0) * sigma;
  endfunction

  cb_t cb;

  initial begin
    int   syms [J];
    y_t   y;
    sym_a esym;
    int   eiters, eu, ed;
    bit   eearly;
    bit   use_d;
    real  sigma;
    longint t0;

    for (int i = 0; i < K; i++)
      for (int k = 0; k < K; k++)
        dmat[i][k] = 0.1 * $itor(((k - i + K) % K) == 0 ? 1 :
                                 ((k - i + K) % K) == 1 ? 4 :
                                 ((k - i + K) % K) == 2 ? 3 : 2);
    // rows of the paper's D: [1 4 3 2], [2 1 4 3], [3 2 1 4], [4 3 2 1]
    for (int i = 0; i < K; i++)
      for (int k = 0; k < K; k++)
        dmat[i][k] = 0.1 * $itor((i == 0) ? (k == 0 ? 1 : k == 1 ? 4 : k == 2 ? 3 : 2) :
                                 (i == 1) ? (k == 0 ? 2 : k == 1 ? 1 : k == 2 ? 4 : 3) :
                                 (i == 2) ? (k == 0 ? 3 : k == 1 ? 2 : k == 2 ? 1 : 4) :
                                            (k == 0 ? 4 : k == 1 ? 3 : k == 2 ? 2 : 1));
    invert(dmat, dinv_paper);
    for (int i = 0; i < K; i++)
      for (int k = 0; k < K; k++) dinv_id[i][k] = (i == k) ? 4096 : 0;
    for (int i = 0; i < K; i++)
      for (int k = 0; k < K; k++) dinv[i][k] = coef_t'(dinv_id[i][k]);
    for (int i = 0; i < K; i++) in_y[i] = '0;

    make_cb(cb);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int a = 0; a < CB_N; a++) begin
      cb_we <= 1;
      cb_addr <= CB_AW'(a);
      cb_wdata <= sample_t'(cb[a]);
      @(posedge clk);
    end
    cb_we <= 0;
    @(posedge clk);

    for (int f = 0; f < NFRAMES; f++) begin
      int mode;
      mode = 0;
      // configuration of this frame
      use_d    = (f % 3) != 0;
      sigma    = (f % 5 == 0) ? 0.0 : (f % 5 == 1) ? 2.0 : (f % 5 == 2) ? 5.0 :
                 (f % 5 == 3) ? 9.0 : 14.0;
      approx_mode = approx_e'(mode);
      max_iter = ITER_W'(1 + (f / 4) % 5);
      en_et    = ((f / 2) % 4) != 0;
      en_adapt = ((f / 3) % 3) != 0;
      alpha_sh = SH_W'(2 + f % 3);
      beta_sh  = SH_W'(2 + (f / 5) % 3);
      eps_sh   = SH_W'(1 + (f / 7) % 4);
      inv_n0   = N0_W'(64 + (f % 7) * 32);
      for (int i = 0; i < K; i++)
        for (int k = 0; k < K; k++)
          dinv[i][k] = coef_t'(use_d ? dinv_paper[i][k] : dinv_id[i][k]);

      // channel
      for (int j = 0; j < J; j++) syms[j] = $urandom_range(0, M - 1);
      begin
        real xs [K][2];
        real z;
        for (int k = 0; k < K; k++)
          for (int ri = 0; ri < 2; ri++) begin
            xs[k][ri] = 0.0;
            for (int s = 0; s < 3; s++) begin
              int d;
              int j;
              j = r_user(k, s);
              d = (r_res(j, 0) == k) ? 0 : 1;
              xs[k][ri] += $itor(cb[cb_addr_of(j, syms[j], d, ri)]);
            end
          end
        for (int i = 0; i < K; i++)
          for (int ri = 0; ri < 2; ri++) begin
            int q;
            z = 0.0;
            if (use_d) for (int k = 0; k < K; k++) z += dmat[i][k] * xs[k][ri];
            else z = xs[i][ri];
            z += noise(sigma);
            q = $rtoi(z + (z >= 0 ? 0.5 : -0.5));
            if (q > 127) q = 127;
            if (q < -128) q = -128;
            y[i][ri] = q;
          end
      end
      for (int i = 0; i < K; i++) begin
        in_y[i].re = sample_t'(y[i][0]);
        in_y[i].im = sample_t'(y[i][1]);
      end

      ref_decode(y, cb, use_d ? dinv_paper : dinv_id, int'(inv_n0), mode,
                 int'(max_iter), en_et, en_adapt, int'(alpha_sh), int'(beta_sh),
                 int'(eps_sh), esym, eiters, eearly, eu, ed);

      // handshake; hold in_valid high while the decoder is busy
      in_valid <= 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      t0 = cyc;
      in_valid <= (f % 4 == 1);   // sometimes offer the next frame early
      @(posedge clk);
      while (!out_valid) @(posedge clk);
      l_init = int'(cyc - t0) - (8 * eiters + 2);
      check(l_init >= 482 && l_init <= 488,
            $sformatf("frame %0d latency %0d: initialization took %0d", f, cyc - t0, l_init));
      if (l_init < l_min) l_min = l_init;
      if (l_init > l_max) l_max = l_init;
      check(int'(out_iters) == eiters,
            $sformatf("frame %0d iterations %0d, expected %0d", f, out_iters, eiters));
      check(out_early == eearly, $sformatf("frame %0d early flag", f));
      for (int j = 0; j < J; j++)
        check(int'(out_sym[j]) == esym[j],
              $sformatf("frame %0d user %0d symbol %0d, expected %0d", f, j, out_sym[j], esym[j]));
      if (sigma == 0.0)
        for (int j = 0; j < J; j++)
          check(int'(out_sym[j]) == syms[j],
                $sformatf("frame %0d noise-free user %0d decoded %0d, sent %0d", f, j, out_sym[j], syms[j]));
      if (out_early) n_early++;
      if (!out_early && en_et && int'(out_iters) == int'(max_iter)) n_cap++;
      if (use_d) n_nr++;
      n_mode[mode]++;
      in_valid <= 0;
      @(posedge clk);
    end

    check(n_cap > 0, "iteration cap never reached with early termination on");
    check(n_up > 0, "self-adaption never scaled by alpha");
    check(n_down > 0, "self-adaption never scaled by beta");
    check(n_nr > 0, "noise reduction never used");
    check(n_stall > 0, "input back-pressure never happened");
    check(n_mode[0] == NFRAMES, "exact mode only");
    check(l_max > l_min, "frame starts at different branch slots");
    $display("folded initialization: %0d to %0d cycles", l_min, l_max);
    $display("mechanisms: early=%0d cap=%0d alpha_passes=%0d beta_passes=%0d nr=%0d stall_cycles=%0d",
             n_early, n_cap, n_up, n_down, n_nr, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
