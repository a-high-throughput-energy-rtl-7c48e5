// tb_polar_sc_top: end-to-end test of the three decoders at N = 32, N' = 8,
// COMB_WAIT = 2. One list of codewords (random, noiseless and noisy channel
// words, each with its own frozen-bit vector) is streamed back-to-back into
// the registered and the pipelined combinational decoders and decoded one by
// one by the hybrid-logic decoder. All outputs are compared with the
// reference SC decoder, the noiseless ones also with the transmitted data,
// and the latencies (1 and 2 clocks, and the hybrid formula) are checked.
// It counts the mechanisms the design has and fails if one never occurred:
// partial-sum gating, two codewords in the pipeline at once, a frozen-vector
// change between consecutive pipelined codewords, combinational-decoder
// activations of the hybrid decoder, partial tree recomputation in its
// synchronous part, and saturating g additions.
module tb_polar_sc_top;
  import polar_ref_pkg::*;
  localparam int N = 32, NP = 8, Q = 5, W = 2, NCW = 24;
`include "tb_polar_sc_body.svh"
  polar_sc_top #(.N(N), .NP(NP), .Q(Q), .COMB_WAIT(W)) dut (.*);
endmodule
