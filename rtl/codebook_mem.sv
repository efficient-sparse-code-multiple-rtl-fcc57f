// codebook_mem: the decoder's copy of the SCMA codebook.
//
// Holds the 96 eight-bit words of a J=6, M=4, N=2 codebook: for every user j,
// codeword m and non-zero dimension d, the real and the imaginary part, at
// address ((j*M + m)*N + d)*2 + ri (see scma_pkg::cb_index). The size and word
// length follow the paper; the codeword values are not given there, so the
// memory is written by the host through a simple synchronous write port. A
// channel that differs per resource can be folded in by writing h_k * x.
//
// All words are read in parallel (the initialization unit needs every
// codeword of every user each frame), so the memory is a register file, not
// a RAM macro. Words reset to zero.
//
// Timing: a write on cycle t is visible on cb_o from cycle t+1.
module codebook_mem
  import scma_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we_i,
  input  logic [CB_AW-1:0]      addr_i,
  input  sample_t               wdata_i,
  output sample_t               cb_o [CB_N]
);

  sample_t mem_q [CB_N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < CB_N; i++) mem_q[i] <= '0;
    end else if (we_i && (int'(addr_i) < CB_N)) begin
      mem_q[addr_i] <= wdata_i;
    end
  end

  assign cb_o = mem_q;

endmodule
