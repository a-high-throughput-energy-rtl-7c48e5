// sc_g_layer: the parallel adder/subtractor block g_{N/2} of the recursive
// decoder.
//
// M independent precomputed g nodes: llr_o[k] = g(llr_i[2k], llr_i[2k+1], v[k]).
// The partial sums pass through 2-input AND gates with ps_en first. Holding
// ps_en low while the first half-decoder is still settling keeps the second
// half-decoder from switching on glitching partial sums (a power measure);
// with ps_en = 1 the gates are transparent. Combinational.
// M = N/2 for a length-N decoder (default 512 for N = 1024).
module sc_g_layer #(
  parameter int unsigned M = polar_pkg::N_DEF / 2,
  parameter int unsigned Q = polar_pkg::Q_DEF
) (
  input  logic [2*M-1:0][Q-1:0] llr_i,
  input  logic [M-1:0]          v_i,
  input  logic                  ps_en,
  output logic [M-1:0][Q-1:0]   llr_o
);
  logic [M-1:0] v_gated;
  assign v_gated = v_i & {M{ps_en}};

  for (genvar k = 0; k < M; k++) begin : g_g
    sc_g #(.Q(Q)) u_g (.l1_i(llr_i[2*k]), .l2_i(llr_i[2*k+1]), .v_i(v_gated[k]),
                       .g_o(llr_o[k]));
  end
endmodule
