// tb_init_unit: random received samples, codebooks and 1/N0 in all four
// initial-probability variants against the reference model; checks all 256
// metrics, the three-cycle latency and back-to-back operation.
module tb_init_unit;
  import scma_pkg::*;
  import scma_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vld_i = 0, vld_o;
  cplx_t y_i [K];
  sample_t cb_i [CB_N];
  logic [N0_W-1:0] inv_n0 = '0;
  approx_e mode = EXACT;
  belief_t p_o [K][NCOMB];
  int checks = 0, failures = 0;

  init_unit dut (.clk, .rst_n, .vld_i, .y_i, .cb_i, .inv_n0_i(inv_n0), .mode_i(mode), .vld_o, .p_o);

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

  y_t  yq [4];
  cb_t cbq [4];
  int  n0q [4];

  initial begin
    p_t pe;
    for (int i = 0; i < K; i++) y_i[i] = '0;
    for (int i = 0; i < CB_N; i++) cb_i[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    for (int n = 0; n < 40; n++) begin
      int lat;
      mode = approx_e'(n % 4);
      for (int b = 0; b < 3; b++) begin  // three frames back to back
        for (int i = 0; i < CB_N; i++) cbq[b][i] = (n < 4) ? $urandom_range(0, 255) - 128
                                                         : $urandom_range(0, 80) - 40;
        for (int i = 0; i < K; i++) begin
          yq[b][i][0] = $urandom_range(0, 255) - 128;
          yq[b][i][1] = $urandom_range(0, 255) - 128;
        end
        n0q[b] = $urandom_range(0, 65535);
      end
      lat = 0;
      for (int b = 0; b < 6; b++) begin
        if (b < 3) begin
          for (int i = 0; i < K; i++) begin
            y_i[i].re = sample_t'(yq[b][i][0]);
            y_i[i].im = sample_t'(yq[b][i][1]);
          end
          for (int i = 0; i < CB_N; i++) cb_i[i] = sample_t'(cbq[b][i]);
        end
        // 1/N0 is used in the third stage
        inv_n0 = (b >= 2 && b < 5) ? N0_W'(n0q[b-2]) : '0;
        vld_i = (b < 3);
        @(posedge clk);
        #1;
        if (b >= 2 && b < 5) begin
          check(vld_o, $sformatf("vld_o after 3 cycles (frame %0d)", b - 2));
          ref_init(yq[b-2], cbq[b-2], n0q[b-2], n % 4, pe);
          for (int k = 0; k < K; k++)
            for (int c = 0; c < NCOMB; c++)
              check(int'(p_o[k][c]) == pe[k][c],
                    $sformatf("mode %0d k %0d c %0d: %0d exp %0d", n % 4, k, c, p_o[k][c], pe[k][c]));
        end else begin
          check(!vld_o, "no vld_o outside the three-cycle window");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
