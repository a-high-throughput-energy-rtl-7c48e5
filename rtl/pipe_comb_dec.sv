// pipe_comb_dec: single-stage pipelined combinational SC decoder.
//
// The length-N decoder is cut between its two half-decoders. Stage A runs
// f_{N/2}, the first DECODE(N/2) and ENCODE on codeword k+1 while stage B runs
// g_{N/2} and the second DECODE(N/2) on codeword k. Between them sit an N x Q
// register holding codeword k's channel LLRs and an N/2 x 1 register holding
// its partial sums v; these two registers are the published pipeline cut.
// This design also registers the second-half frozen indicators a'' with them,
// so the indicator vector can change from codeword to codeword, and holds u'
// for one more cycle so that both halves of a codeword leave the output
// register together.
// Timing: a codeword presented with in_valid at rising edge t appears on u_out
// with out_valid after edge t+2; one codeword is accepted per clock. The
// longest path is about that of a length-N/2 combinational decoder, so the
// clock can run about twice as fast as for comb_dec_reg.
// Asynchronous active-low reset; the valid flags are this design's additions.
module pipe_comb_dec #(
  parameter int unsigned N = polar_pkg::N_DEF,
  parameter int unsigned Q = polar_pkg::Q_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][Q-1:0] llr_in,
  input  logic [N-1:0]        frz_in,
  output logic                out_valid,
  output logic [N-1:0]        u_out
);
  localparam int unsigned H = N / 2;

  // input and bit indicator registers
  logic [N-1:0][Q-1:0] llr_q;
  logic [N-1:0]        frz_q;
  logic                vld_q;
  // stage A
  logic [H-1:0][Q-1:0] l_a;
  logic [H-1:0]        u_a, v_a;
  // pipeline registers
  logic [N-1:0][Q-1:0] llr_p;   // N x Q
  logic [H-1:0]        v_p;     // N/2 x 1
  logic [H-1:0]        frz_p;   // a'' of the codeword in stage B
  logic [H-1:0]        u_a_p;   // u' of the codeword in stage B
  logic                vld_p;
  // stage B
  logic [H-1:0][Q-1:0] l_b;
  logic [H-1:0]        u_b;

  sc_f_layer #(.M(H), .Q(Q)) u_fl  (.llr_i(llr_q), .llr_o(l_a));
  comb_dec   #(.N(H), .Q(Q)) u_da  (.llr_i(l_a), .frz_i(frz_q[H-1:0]), .ps_en(1'b1),
                                    .u_o(u_a));
  polar_enc  #(.M(H))        u_enc (.u_i(u_a), .x_o(v_a));

  sc_g_layer #(.M(H), .Q(Q)) u_gl  (.llr_i(llr_p), .v_i(v_p), .ps_en(1'b1), .llr_o(l_b));
  comb_dec   #(.N(H), .Q(Q)) u_db  (.llr_i(l_b), .frz_i(frz_p), .ps_en(1'b1), .u_o(u_b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      llr_q     <= '0;
      frz_q     <= '0;
      vld_q     <= 1'b0;
      llr_p     <= '0;
      v_p       <= '0;
      frz_p     <= '0;
      u_a_p     <= '0;
      vld_p     <= 1'b0;
      u_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      vld_q <= in_valid;
      if (in_valid) begin
        llr_q <= llr_in;
        frz_q <= frz_in;
      end
      vld_p <= vld_q;
      if (vld_q) begin
        llr_p <= llr_q;
        v_p   <= v_a;
        frz_p <= frz_q[N-1:H];
        u_a_p <= u_a;
      end
      out_valid <= vld_p;
      if (vld_p) u_out <= {u_b, u_a_p};
    end
  end
endmodule
