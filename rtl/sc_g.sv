// sc_g: one g node, g(l1,l2,v) = l2 + (1-2v)*l1, with precomputation.
//
// Both candidate results, l2 + l1 and l2 - l1, are formed in parallel by a
// sign-magnitude adder and subtractor; the partial sum v only drives the
// final 2:1 multiplexer, so the delay seen from v is one multiplexer.
// Sign-magnitude addition: like signs add magnitudes (saturating at
// 2^(Q-1)-1) and keep the sign; unlike signs subtract the smaller magnitude
// from the larger and take the larger one's sign, with a tie resolved to the
// sign of l2. With that tie rule the output sign equals the comparator-based
// odd-bit decision rule used in the decoder cells. Purely combinational.
module sc_g #(
  parameter int unsigned Q = polar_pkg::Q_DEF
) (
  input  logic [Q-1:0] l1_i,
  input  logic [Q-1:0] l2_i,
  input  logic         v_i,
  output logic [Q-1:0] g_o
);
  localparam logic [Q-1:0] MAXMAG = Q'((1 << (Q-1)) - 1);

  logic [Q-1:0] sum, dif;

  // sign-magnitude (sa,ma) + (sb,mb); tie of unlike signs takes sb
  function automatic logic [Q-1:0] smadd(input logic sa, input logic [Q-2:0] ma,
                                         input logic sb, input logic [Q-2:0] mb);
    logic [Q-1:0] wide;
    logic [Q-1:0] res;
    if (sa == sb) begin
      wide = {1'b0, ma} + {1'b0, mb};
      res  = {sb, (wide > MAXMAG) ? MAXMAG[Q-2:0] : wide[Q-2:0]};
    end else if (mb >= ma) begin
      res = {sb, mb - ma};
    end else begin
      res = {sa, ma - mb};
    end
    return res;
  endfunction

  always_comb begin
    sum = smadd( l1_i[Q-1], l1_i[Q-2:0], l2_i[Q-1], l2_i[Q-2:0]);
    dif = smadd(~l1_i[Q-1], l1_i[Q-2:0], l2_i[Q-1], l2_i[Q-2:0]);
    g_o = v_i ? dif : sum;
  end
endmodule
