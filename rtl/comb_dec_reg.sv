// comb_dec_reg: the combinational decoder between its input, bit-indicator
// and output registers.
//
// When in_valid is high at a rising edge, the channel LLRs and the frozen-bit
// indicator vector are captured. The combinational decoder (comb_dec) then has
// one full clock period to settle, and at the next rising edge the decision
// vector is written to the output register with out_valid = 1. A new codeword
// can be loaded at every edge, so throughput is N bits per clock period and
// latency is one period. The clock period must cover the decoder's
// combinational delay, which grows about linearly with N.
// ps_en is the partial-sum gate of the outer g block (see sc_g_layer); a
// signal that is low in the first half and high in the second half of each
// period saves power, a constant 1 disables the measure.
// The valid flags and the asynchronous active-low reset are this design's
// additions around the published register/decoder/register arrangement.
module comb_dec_reg #(
  parameter int unsigned N = polar_pkg::N_DEF,
  parameter int unsigned Q = polar_pkg::Q_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][Q-1:0] llr_in,
  input  logic [N-1:0]        frz_in,
  input  logic                ps_en,
  output logic                out_valid,
  output logic [N-1:0]        u_out
);
  logic [N-1:0][Q-1:0] llr_q;   // input registers
  logic [N-1:0]        frz_q;   // bit indicator registers
  logic                vld_q;
  logic [N-1:0]        u_dec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      llr_q     <= '0;
      frz_q     <= '0;
      vld_q     <= 1'b0;
      u_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      vld_q     <= in_valid;
      if (in_valid) begin
        llr_q <= llr_in;
        frz_q <= frz_in;
      end
      out_valid <= vld_q;
      if (vld_q) u_out <= u_dec;   // output registers
    end
  end

  comb_dec #(.N(N), .Q(Q)) u_dec_core (.llr_i(llr_q), .frz_i(frz_q), .ps_en(ps_en),
                                       .u_o(u_dec));
endmodule
