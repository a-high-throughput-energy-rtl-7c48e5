// comb_dec4: combinational SC decoder for block length 4, the leaf cell of
// every larger decoder.
//
// Stage 0 forms l'0 = f(l0,l1), l'1 = f(l2,l3) (comparator + multiplexer on
// the magnitudes, XOR on the signs) and the two g outputs
// s01 = g(l0,l1,u0^u1), s23 = g(l2,l3,u1), each from a precomputed adder and
// subtractor selected by its partial sum. Stage 1 makes the decisions:
//   even bits: u0 = (s(l0)^s(l1)^s(l2)^s(l3)) & a0, u2 = (s(s01)^s(s23)) & a2
//   odd bits without an adder: u_{2i+1} = 0 if a = 0, else s(lambda2) when
//   |lambda2| >= |lambda1|, else s(lambda1) ^ u_{2i}, where (lambda1,lambda2)
//   are (l'0,l'1) for u1 and (s01,s23) for u3.
// Frozen bits (a_i = 0) are forced to zero by AND gates. The structure is the
// published N = 4 schematic; only the sign-magnitude adder details (saturation,
// tie sign) are this design's own, see sc_g. Combinational, no clock.
module comb_dec4 #(
  parameter int unsigned Q = polar_pkg::Q_DEF
) (
  input  logic [3:0][Q-1:0] llr_i,
  input  logic [3:0]        frz_i,
  output logic [3:0]        u_o
);
  logic [Q-1:0] lp0, lp1, s01, s23;
  logic         u0, u1, u2, u3;

  sc_f #(.Q(Q)) u_f0 (.l1_i(llr_i[0]), .l2_i(llr_i[1]), .f_o(lp0));
  sc_f #(.Q(Q)) u_f1 (.l1_i(llr_i[2]), .l2_i(llr_i[3]), .f_o(lp1));
  sc_g #(.Q(Q)) u_g0 (.l1_i(llr_i[0]), .l2_i(llr_i[1]), .v_i(u0 ^ u1), .g_o(s01));
  sc_g #(.Q(Q)) u_g1 (.l1_i(llr_i[2]), .l2_i(llr_i[3]), .v_i(u1),      .g_o(s23));

  always_comb begin
    u0 = (lp0[Q-1] ^ lp1[Q-1]) & frz_i[0];
    u1 = frz_i[1] & ((lp1[Q-2:0] >= lp0[Q-2:0]) ? lp1[Q-1] : (lp0[Q-1] ^ u0));
    u2 = (s01[Q-1] ^ s23[Q-1]) & frz_i[2];
    u3 = frz_i[3] & ((s23[Q-2:0] >= s01[Q-2:0]) ? s23[Q-1] : (s01[Q-1] ^ u2));
    u_o = {u3, u2, u1, u0};
  end
endmodule
