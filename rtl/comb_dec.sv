// comb_dec: combinational SC decoder for block length N (N a power of two,
// N >= 4), the recursive decoder of the SC algorithm written level by level.
//
// Recursion being implemented, for a node of length S > 4:
//             l'  = f_{S/2}(l)                 (sc_f_layer)
//             u'  = DECODE(l', a[S/2-1:0])     (node of length S/2)
//             v   = ENCODE(u')                 (polar_enc, S/2)
//             l'' = g_{S/2}(l, v)              (sc_g_layer)
//             u'' = DECODE(l'', a[S-1:S/2])    (node of length S/2)
//             u   = (u', u'')
// and nodes of length 4 are comb_dec4 cells. Level L of the tree has 2^L nodes
// of length S = N/2^L; node j makes decisions u[j*S +: S] from indicators
// a[j*S +: S] and takes its S input LLRs from its parent: the parent's f
// output for even j, its g output for odd j. Unrolling the recursion this way
// instead of with a self-instantiating module gives the same circuit.
// There is no storage: a codeword is decoded in one (long) clock period of
// the surrounding registers, the critical path running through the first and
// then the second half-decoder of every node. ps_en gates the partial sums of
// the outermost g_{N/2} block (AND gates); tie it high when the power measure
// is not used. Inner levels are ungated. frz_i may change with every codeword.
module comb_dec #(
  parameter int unsigned N = polar_pkg::N_DEF,
  parameter int unsigned Q = polar_pkg::Q_DEF
) (
  input  logic [N-1:0][Q-1:0] llr_i,
  input  logic [N-1:0]        frz_i,
  input  logic                ps_en,
  output logic [N-1:0]        u_o
);
  localparam int unsigned NL = $clog2(N) - 2;   // levels above the N=4 cells

  for (genvar L = 0; L <= NL; L++) begin : g_lvl
    localparam int unsigned S = N >> L;
    for (genvar j = 0; j < (1 << L); j++) begin : g_node
      logic [S-1:0][Q-1:0] llr;          // this node's input LLRs
      logic [S-1:0]        u;            // this node's decisions
      if (L == 0) begin : g_root
        assign llr = llr_i;
      end else if (j % 2 == 0) begin : g_first
        assign llr = g_lvl[L-1].g_node[j/2].g_split.l_f;
      end else begin : g_second
        assign llr = g_lvl[L-1].g_node[j/2].g_split.l_g;
      end

      if (L < NL) begin : g_split
        logic [S/2-1:0][Q-1:0] l_f, l_g;
        logic [S/2-1:0]        v;
        sc_f_layer #(.M(S/2), .Q(Q)) u_fl  (.llr_i(llr), .llr_o(l_f));
        polar_enc  #(.M(S/2))        u_enc (.u_i(g_lvl[L+1].g_node[2*j].u), .x_o(v));
        sc_g_layer #(.M(S/2), .Q(Q)) u_gl  (.llr_i(llr), .v_i(v),
                                            .ps_en((L == 0) ? ps_en : 1'b1), .llr_o(l_g));
        assign u = {g_lvl[L+1].g_node[2*j+1].u, g_lvl[L+1].g_node[2*j].u};
      end else begin : g_cell
        comb_dec4 #(.Q(Q)) u_dec4 (.llr_i(llr), .frz_i(frz_i[j*S +: S]), .u_o(u));
      end
    end
  end

  assign u_o = g_lvl[0].g_node[0].u;
endmodule
