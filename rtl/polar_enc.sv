// polar_enc: the ENCODE block that turns first-half decisions into partial
// sums, an XOR network of depth log2(M).
//
// It computes the polar transform x = u * F^{(x)n}, F = [1 0; 1 1], with its
// output in bit-reversed index order. That order matches the LLR pairing of
// the decoder: with lo = ENCODE(u[M/2-1:0]) and hi = ENCODE(u[M-1:M/2]) it
// satisfies x[2k] = lo[k] ^ hi[k], x[2k+1] = hi[k]; for M = 4 it gives
// (u0^u1^u2^u3, u2^u3, u1^u3, u3). It is built as log2(M) butterfly columns
// (each XORs element i with element i+h when bit h of i is clear) followed by
// the bit-reversal wiring. The same module also serves as a length-M polar
// encoder for test codewords. Combinational. M must be a power of two.
module polar_enc #(
  parameter int unsigned M = polar_pkg::N_DEF / 2
) (
  input  logic [M-1:0] u_i,
  output logic [M-1:0] x_o
);
  localparam int unsigned LG = (M > 1) ? $clog2(M) : 1;

  // MASK[t] has a one at every position i whose bit t is clear
  function automatic logic [M-1:0] mask(input int unsigned t);
    logic [M-1:0] m = '0;
    for (int i = 0; i < M; i++) m[i] = ((i >> t) & 1) == 0;
    return m;
  endfunction

  function automatic int unsigned bitrev(input int unsigned i);
    int unsigned r = 0;
    for (int b = 0; b < LG; b++) if (((i >> b) & 1) != 0) r |= 1 << (LG - 1 - b);
    return r;
  endfunction

  logic [M-1:0] col [LG+1];

  assign col[0] = u_i;
  for (genvar t = 0; t < LG; t++) begin : g_col
    localparam logic [M-1:0] MASK = mask(t);
    if (M > 1) begin : g_bfly
      assign col[t+1] = col[t] ^ ((col[t] >> (1 << t)) & MASK);
    end else begin : g_pass
      assign col[t+1] = col[t];
    end
  end

  // bit-reversal wiring
  for (genvar i = 0; i < M; i++) begin : g_rev
    localparam int unsigned R = (M > 1) ? bitrev(i) : 0;
    assign x_o[R] = col[LG][i];
  end
endmodule
