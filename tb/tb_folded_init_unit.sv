// tb_folded_init_unit: runs frames of random samples, random codebooks and
// random 1/N0 through the folded initialization and compares all 4 x 64
// initial beliefs with the reference (exact Max-Log). Checks that vld_o
// comes 482 to 488 cycles after vld_i, that every slot offset 0..6 of the
// branches occurs at the frame start, that vld_i while busy is ignored, and
// that the output holds between frames.
module tb_folded_init_unit;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  localparam int NF = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vld_i = 0, vld_o;
  cplx_t y [K];
  sample_t cb [CB_N];
  logic [N0_W-1:0] inv_n0;
  belief_t p [K][NCOMB];
  int checks = 0, failures = 0, n_sat = 0;
  int cyc = 0;
  bit seen [1000];
  always @(posedge clk) cyc++;

  folded_init_unit dut (.clk, .rst_n, .vld_i, .y_i(y), .cb_i(cb), .inv_n0_i(inv_n0),
                        .vld_o, .p_o(p));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y_t yv;
    cb_t cbv;
    p_t pe;
    int t0, lat, n_lat;
    for (int i = 0; i < K; i++) y[i] = '0;
    for (int i = 0; i < CB_N; i++) cb[i] = '0;
    inv_n0 = '0;
    n_lat = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      repeat (f % 7 + 1) @(posedge clk);
      #1;
      for (int i = 0; i < CB_N; i++) begin
        cbv[i] = $urandom_range(0, 80) - 40;
        cb[i] = sample_t'(cbv[i]);
      end
      for (int k = 0; k < K; k++) begin
        yv[k][0] = $urandom_range(0, 255) - 128;
        yv[k][1] = $urandom_range(0, 255) - 128;
        y[k].re = sample_t'(yv[k][0]);
        y[k].im = sample_t'(yv[k][1]);
      end
      inv_n0 = N0_W'($urandom_range(1, 400));
      ref_init(yv, cbv, int'(inv_n0), 0, pe);
      vld_i = 1;
      t0 = cyc;
      @(posedge clk); #1;
      vld_i = 0;
      // a second start while busy must be ignored; y changes must not matter
      repeat (20) @(posedge clk);
      #1;
      vld_i = 1;
      for (int k = 0; k < K; k++) y[k] = '0;
      @(posedge clk); #1;
      vld_i = 0;
      while (!vld_o && cyc - t0 < 600) begin @(posedge clk); #1; end
      lat = cyc - t0;
      check(vld_o, "vld_o arrives");
      check(lat >= 482 && lat <= 488, $sformatf("frame %0d latency %0d", f, lat));
      if (lat >= 0 && lat < 1000) seen[lat] = 1;
      for (int k = 0; k < K; k++)
        for (int c = 0; c < NCOMB; c++) begin
          check(int'(p[k][c]) == pe[k][c],
                $sformatf("frame %0d k %0d c %0d: %0d exp %0d", f, k, c, p[k][c], pe[k][c]));
          n_sat += (pe[k][c] == -32768);
        end
      @(posedge clk); #1;
      check(!vld_o, "vld_o is a pulse");
      check(p[3][63] == belief_t'(pe[3][63]), "output holds");
    end
    for (int l = 482; l <= 488; l++) n_lat += seen[l];
    check(n_lat == 7, $sformatf("all seven slot offsets seen (%0d)", n_lat));
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
