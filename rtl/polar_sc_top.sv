// polar_sc_top: the three combinational SC decoder architectures side by side.
//
//   cd_*  : combinational decoder of length N between input/indicator/output
//           registers (comb_dec_reg); one codeword per long clock period.
//   pd_*  : single-stage pipelined combinational decoder of length N
//           (pipe_comb_dec); one codeword per clock, two-cycle latency.
//   hl_*  : hybrid-logic decoder of length N with a length-NP combinational
//           accelerator (hl_decoder); start/done handshake.
// All three share the clock and reset but are otherwise independent; each has
// its own LLR, frozen-bit indicator and decision ports. Frozen-bit indicators
// use 1 = data bit, 0 = frozen bit; LLRs are Q-bit sign-magnitude words.
module polar_sc_top #(
  parameter int unsigned N         = polar_pkg::N_DEF,
  parameter int unsigned NP        = polar_pkg::NP_DEF,
  parameter int unsigned Q         = polar_pkg::Q_DEF,
  parameter int unsigned COMB_WAIT = polar_pkg::COMB_WAIT_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  // registered combinational decoder
  input  logic                cd_in_valid,
  input  logic [N-1:0][Q-1:0] cd_llr,
  input  logic [N-1:0]        cd_frz,
  input  logic                cd_ps_en,
  output logic                cd_out_valid,
  output logic [N-1:0]        cd_u,
  // pipelined combinational decoder
  input  logic                pd_in_valid,
  input  logic [N-1:0][Q-1:0] pd_llr,
  input  logic [N-1:0]        pd_frz,
  output logic                pd_out_valid,
  output logic [N-1:0]        pd_u,
  // hybrid-logic decoder
  input  logic                hl_start,
  input  logic [N-1:0][Q-1:0] hl_llr,
  input  logic [N-1:0]        hl_frz,
  output logic                hl_busy,
  output logic                hl_done,
  output logic [N-1:0]        hl_u
);
  comb_dec_reg #(.N(N), .Q(Q)) u_cd (
    .clk, .rst_n, .in_valid(cd_in_valid), .llr_in(cd_llr), .frz_in(cd_frz),
    .ps_en(cd_ps_en), .out_valid(cd_out_valid), .u_out(cd_u));

  pipe_comb_dec #(.N(N), .Q(Q)) u_pd (
    .clk, .rst_n, .in_valid(pd_in_valid), .llr_in(pd_llr), .frz_in(pd_frz),
    .out_valid(pd_out_valid), .u_out(pd_u));

  hl_decoder #(.N(N), .NP(NP), .Q(Q), .COMB_WAIT(COMB_WAIT)) u_hl (
    .clk, .rst_n, .start(hl_start), .llr_in(hl_llr), .frz_in(hl_frz),
    .busy(hl_busy), .done(hl_done), .u_out(hl_u));
endmodule
