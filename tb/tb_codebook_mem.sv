// tb_codebook_mem: checks reset to zero, write/read-back of all 96 words,
// one-cycle write latency and that addresses beyond the codebook are ignored.
module tb_codebook_mem;
  import scma_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [CB_AW-1:0] addr = '0;
  sample_t wdata = '0;
  sample_t cb [CB_N];
  int model [CB_N];
  int checks = 0, failures = 0;

  codebook_mem dut (.clk, .rst_n, .we_i(we), .addr_i(addr), .wdata_i(wdata), .cb_o(cb));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < CB_N; i++) check(cb[i] == 0, "reset value");
    // write every word, in a scrambled order
    for (int n = 0; n < CB_N; n++) begin
      int a;
      a = (n * 37) % CB_N;
      model[a] = $urandom_range(0, 255) - 128;
      we <= 1; addr <= CB_AW'(a); wdata <= sample_t'(model[a]);
      @(posedge clk);
      #1;
      check(int'(cb[a]) == model[a], $sformatf("word %0d after write", a));
    end
    // the write is not visible before the clock edge
    we <= 1; addr <= 7'd5; wdata <= sample_t'(model[5] ^ 8'h5a);
    #1 check(int'(cb[5]) == model[5], "write visible before the edge");
    @(posedge clk); #1;
    model[5] = int'(sample_t'(model[5] ^ 8'h5a));
    check(int'(cb[5]) == model[5], "second write");
    // out-of-range addresses
    for (int a = CB_N; a < 128; a++) begin
      we <= 1; addr <= CB_AW'(a); wdata <= 8'h7f;
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk); #1;
    for (int i = 0; i < CB_N; i++) check(int'(cb[i]) == model[i], $sformatf("word %0d at the end", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
