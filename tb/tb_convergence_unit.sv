// tb_convergence_unit: directed cases of the stability judgement and
// self-adaption (first iteration, V_t = 0, growth, shrink, inside the band,
// both signs) followed by random vectors against the reference model.
module tb_convergence_unit;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  logic first = 0, adapt = 0;
  logic [SH_W-1:0] ash = 4'd3, bsh = 4'd3, esh = 4'd4;
  bvec_t v, vt, vo;
  logic [M-1:0] st, up, dn;
  int checks = 0, failures = 0;
  int n_up = 0, n_dn = 0, n_st = 0;

  convergence_unit dut (.first_i(first), .adapt_i(adapt), .alpha_sh_i(ash), .beta_sh_i(bsh),
                        .eps_sh_i(esh), .v_i(v), .vt_i(vt), .v_o(vo), .stable_o(st),
                        .up_o(up), .down_o(dn));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic run_check(input string tag);
    #1;
    for (int m = 0; m < M; m++) begin
      bit es, eu, ed;
      int ev;
      ev = ref_conv(int'(v[m]), int'(vt[m]), first, adapt, int'(ash), int'(bsh), int'(esh), es, eu, ed);
      check(int'(vo[m]) == ev && st[m] == es && up[m] == eu && dn[m] == ed,
            $sformatf("%s m %0d: v %0d vt %0d -> %0d st%b up%b dn%b, exp %0d %b%b%b",
                      tag, m, v[m], vt[m], vo[m], st[m], up[m], dn[m], ev, es, eu, ed));
      n_up += up[m]; n_dn += dn[m]; n_st += st[m];
    end
  endtask

  initial begin
    // directed: eps = 1/16, alpha = 1.125, beta = 0.875
    adapt = 1; first = 0;
    v  = '{belief_t'(-1100), belief_t'(-900), belief_t'(-1010), belief_t'(0)};
    vt = '{belief_t'(-1000), belief_t'(-1000), belief_t'(-1000), belief_t'(0)};
    #1;
    // element order: v[3] = -1100 (grew by 10%): alpha; v[2] = -900: beta;
    // v[1] = -1010: stable; v[0] = 0 with vt 0: stable
    check(up[3] && vo[3] == belief_t'(-1100 + (-1100 >>> 3)), "growth scaled by alpha");
    check(dn[2] && vo[2] == belief_t'(-900 - (-900 >>> 3)), "shrink scaled by beta");
    check(st[1] && !up[1] && !dn[1] && vo[1] == -1010, "inside band stable");
    check(st[0] && vo[0] == 0, "zero stays stable");
    // same values without adaption: only judged
    adapt = 0;
    #1;
    check(st == 4'b0011 && up == 0 && dn == 0 && vo == v, "early termination only");
    // first iteration: nothing stable, nothing scaled
    first = 1; adapt = 1;
    #1;
    check(st == 0 && up == 0 && dn == 0 && vo == v, "first iteration passes");
    first = 0;
    // V_t = 0 with V != 0 is unstable and unscaled
    v = '{belief_t'(5), belief_t'(-5), belief_t'(0), belief_t'(7)};
    vt = '{default: '0};
    #1;
    check(st == 4'b0010 && up == 0 && dn == 0, "V_t = 0 handling");
    // positive values
    v  = '{belief_t'(200), belief_t'(100), belief_t'(103), belief_t'(32767)};
    vt = '{belief_t'(100), belief_t'(200), belief_t'(100), belief_t'(20000)};
    #1;
    check(up[3] && dn[2] && st[1] && up[0], "positive V_t directions");
    check(vo[0] == 32767, "alpha saturates");
    // random
    for (int n = 0; n < 3000; n++) begin
      first = ($urandom_range(0, 9) == 0);
      adapt = $urandom_range(0, 1);
      ash = SH_W'($urandom_range(1, 6));
      bsh = SH_W'($urandom_range(1, 6));
      esh = SH_W'($urandom_range(0, 8));
      for (int m = 0; m < M; m++) begin
        int b;
        b = $urandom_range(0, 65535) - 32768;
        if (n % 4 == 0) b = b / 64;
        vt[m] = belief_t'(b);
        case ($urandom_range(0, 3))
          0: v[m] = belief_t'(b);
          1: v[m] = belief_t'(sat16(b + (b >>> $urandom_range(1, 6))));
          2: v[m] = belief_t'(sat16(b - (b >>> $urandom_range(1, 6))));
          default: v[m] = belief_t'($urandom_range(0, 65535) - 32768);
        endcase
      end
      run_check($sformatf("random %0d", n));
    end
    check(n_up > 0 && n_dn > 0 && n_st > 0, "all outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
