// sc_f_layer: the parallel comparator block f_{N/2} of the recursive decoder.
//
// M independent min-sum f nodes on adjacent LLR pairs:
// llr_o[k] = f(llr_i[2k], llr_i[2k+1]), k = 0..M-1, as in the recursive SC
// algorithm. Combinational; delay is one comparator plus one multiplexer.
// M = N/2 for a length-N decoder (default 512 for N = 1024).
module sc_f_layer #(
  parameter int unsigned M = polar_pkg::N_DEF / 2,
  parameter int unsigned Q = polar_pkg::Q_DEF
) (
  input  logic [2*M-1:0][Q-1:0] llr_i,
  output logic [M-1:0][Q-1:0]   llr_o
);
  for (genvar k = 0; k < M; k++) begin : g_f
    sc_f #(.Q(Q)) u_f (.l1_i(llr_i[2*k]), .l2_i(llr_i[2*k+1]), .f_o(llr_o[k]));
  end
endmodule
