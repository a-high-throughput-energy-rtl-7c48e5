// sc_f: one min-sum f node, f(l1,l2) ~ s-product * min(|l1|,|l2|).
//
// Works directly on sign-magnitude words: a magnitude comparator drives a
// 2:1 multiplexer that passes the smaller magnitude, and the output sign is
// the XOR of the two input signs. This is the comparator/multiplexer pair of
// the N = 4 combinational decoder cell. A zero output magnitude keeps the XORed
// sign bit, so the hard decision s(f) is always s(l1) ^ s(l2).
// Purely combinational, no clock.
module sc_f #(
  parameter int unsigned Q = polar_pkg::Q_DEF
) (
  input  logic [Q-1:0] l1_i,
  input  logic [Q-1:0] l2_i,
  output logic [Q-1:0] f_o
);
  logic l1_le_l2;
  always_comb begin
    l1_le_l2 = (l1_i[Q-2:0] <= l2_i[Q-2:0]);
    f_o[Q-1]   = l1_i[Q-1] ^ l2_i[Q-1];
    f_o[Q-2:0] = l1_le_l2 ? l1_i[Q-2:0] : l2_i[Q-2:0];
  end
endmodule
