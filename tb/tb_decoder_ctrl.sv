// tb_decoder_ctrl: drives the frame sequencer with a cycle model of the
// data path (front end 4 cycles, RN units 5, LN units 1, judge units 3) and
// a stability model that reports "all stable" from a chosen RN pass on.
// For random I_max, early-termination enable and convergence point it
// checks the iteration count, the early flag, the 8*I+5 latency, the
// number of RN and LN writes, the first-iteration flag, the clear and the
// input handshake (frames offered while busy must wait).
module tb_decoder_ctrl;
  import scma_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready;
  logic [ITER_W-1:0] max_iter = '0;
  logic et = 0;
  logic clr, front_vld, init_done, rn_start, rn_done, rn_wr, first, all_stable;
  logic ln_start, ln_done, ln_wr, judge_start, judge_done, done, early;
  logic [ITER_W-1:0] iters;

  decoder_ctrl dut (.clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready),
                    .max_iter_i(max_iter), .et_i(et), .clr_o(clr), .front_vld_o(front_vld),
                    .init_done_i(init_done), .rn_start_o(rn_start), .rn_done_i(rn_done),
                    .rn_wr_o(rn_wr), .first_o(first), .all_stable_i(all_stable),
                    .ln_start_o(ln_start), .ln_done_i(ln_done), .ln_wr_o(ln_wr),
                    .judge_start_o(judge_start), .judge_done_i(judge_done), .done_o(done),
                    .iters_o(iters), .early_o(early));

  // data-path model: valid shift registers
  logic [3:0] fe_sr;
  logic [4:0] rn_sr;
  logic [2:0] j_sr;
  logic       ln_q;
  int         stab_at;     // RN pass from which the stability matrix is all ones
  int         n_rn_wr, n_ln_wr, n_first_wr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fe_sr <= '0; rn_sr <= '0; j_sr <= '0; ln_q <= 1'b0;
      n_rn_wr <= 0; n_ln_wr <= 0; n_first_wr <= 0;
    end else begin
      fe_sr <= {fe_sr[2:0], front_vld};
      rn_sr <= {rn_sr[3:0], rn_start};
      j_sr  <= {j_sr[1:0], judge_start};
      ln_q  <= ln_start;
      if (clr) begin
        n_rn_wr <= 0; n_ln_wr <= 0; n_first_wr <= 0;
      end else begin
        if (rn_wr) begin n_rn_wr <= n_rn_wr + 1; n_first_wr <= n_first_wr + first; end
        if (ln_wr) n_ln_wr <= n_ln_wr + 1;
      end
    end
  end
  assign init_done  = fe_sr[3];
  assign rn_done    = rn_sr[4];
  assign judge_done = j_sr[2];
  assign ln_done    = ln_q;
  assign all_stable = (n_rn_wr >= stab_at);

  int checks = 0, failures = 0;
  int n_early = 0, n_cap = 0, n_wait = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // done must never fire outside a frame; clear only with the handshake
  always @(posedge clk) if (rst_n) begin
    if (clr && !in_ready) begin failures++; $display("FAIL: clear while busy"); end
  end

  initial begin
    stab_at = 100;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int f = 0; f < 500; f++) begin
      int imax, exp_i, t0, busy;
      bit exp_early;
      max_iter = ITER_W'($urandom_range(0, 7));
      et = $urandom_range(0, 1);
      stab_at = $urandom_range(1, 8);
      imax = (max_iter == 0) ? 1 : int'(max_iter);
      exp_i = (et && stab_at < imax) ? stab_at : imax;
      exp_early = et && stab_at < imax;
      in_valid = 1;
      busy = 0;
      while (!in_ready) begin @(posedge clk); #1; busy++; end
      t0 = cyc;
      @(posedge clk); #1;
      // keep offering the next frame while busy: it must not be accepted
      in_valid = ($urandom_range(0, 1) != 0);
      check(!in_ready, "busy after the start");
      while (!done) begin
        @(posedge clk); #1;
        if (cyc - t0 > 200) break;
      end
      // done is combinational in J_WAIT: sample before the edge
      check(done, "frame finished");
      check(cyc - t0 == 8 * exp_i + 5,
            $sformatf("frame %0d: latency %0d exp %0d", f, cyc - t0, 8 * exp_i + 5));
      check(int'(iters) == exp_i, $sformatf("frame %0d: iters %0d exp %0d", f, iters, exp_i));
      check(early == exp_early, $sformatf("frame %0d: early %b exp %b", f, early, exp_early));
      check(n_rn_wr == exp_i, $sformatf("frame %0d: rn writes %0d exp %0d", f, n_rn_wr, exp_i));
      check(n_ln_wr == exp_i - 1, $sformatf("frame %0d: ln writes %0d exp %0d", f, n_ln_wr, exp_i - 1));
      check(n_first_wr == 1, "first flag on exactly the first RN write");
      n_early += exp_early;
      n_cap += !exp_early;
      if (in_valid) n_wait++;
      @(posedge clk); #1;
      check(in_ready, "idle after done");
      in_valid = 0;
      repeat ($urandom_range(0, 3)) begin @(posedge clk); #1; end
    end
    check(n_early > 0 && n_cap > 0 && n_wait > 0, "early, cap and waiting offers all seen");
    $display("early=%0d cap=%0d waited=%0d", n_early, n_cap, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
