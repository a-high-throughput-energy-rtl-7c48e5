// hl_sync: synchronous part of the hybrid-logic SC decoder (DECODE_SYNCH).
//
// The length-N code is split into K = N/NP component codes of length NP.
// For component code i (input idx, visited in the order 0,1,...,K-1) this
// block computes the NP LLRs lambda^(i) that the combinational decoder needs,
// by walking the top M = log2(K) stages of the SC tree. Each stage d has its
// own LLR register array of N/2^d words. Stage d is computed from stage d-1
// with f_{N/2^d} when bit (M-d) of i is 0 and with g_{N/2^d} when it is 1; the
// g partial sums are the polar transform (polar_enc) of the already decoded
// bits of the left sibling subtree, taken from u_dec. Only the stages below
// the branch point of i and i-1 are recomputed: all M stages for i = 0, and
// tz(i)+1 stages otherwise (tz = trailing zeros).
// Timing: start is sampled at a rising edge; one stage is computed per clock
// after that; done pulses for one cycle when lambda_o (a register output) is
// valid, i.e. (stages + 1) cycles after the start edge. u_dec must hold the
// decisions of all component codes before i while stages are computed.
// The published hybrid decoder uses an existing semi-parallel decoder with P
// processing elements here; this block is a simpler stand-in with one f/g
// pair per LLR of a stage (P = N/2) and one stage per clock.
module hl_sync #(
  parameter int unsigned N  = polar_pkg::N_DEF,
  parameter int unsigned NP = polar_pkg::NP_DEF,
  parameter int unsigned Q  = polar_pkg::Q_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [$clog2(N/NP)-1:0] idx,
  input  logic [N-1:0][Q-1:0]  llr_ch,
  input  logic [N-1:0]         u_dec,
  output logic                 busy,
  output logic                 done,
  output logic [NP-1:0][Q-1:0] lambda_o
);
  localparam int unsigned K  = N / NP;
  localparam int unsigned M  = $clog2(K);
  localparam int unsigned DW = $clog2(M + 1);

  logic [M-1:0]  idx_q;
  logic [DW-1:0] cur_d;
  logic          active;

  // first stage to recompute for component code i
  function automatic logic [DW-1:0] first_stage(input logic [M-1:0] i);
    logic [DW-1:0] d;
    d = DW'(1);
    for (int b = M - 1; b >= 0; b--) begin
      if (i[b]) d = DW'(M - b);   // lowest set bit wins (last assignment)
    end
    return d;
  endfunction

  for (genvar d = 1; d <= M; d++) begin : g_st
    localparam int unsigned SZ = N >> d;
    logic [SZ-1:0][Q-1:0]   lvl_q;
    logic [2*SZ-1:0][Q-1:0] src;
    logic [SZ-1:0][Q-1:0]   f_out, g_out;
    logic [SZ-1:0]          u_sib, v;
    logic                   branch;
    logic [$clog2(N)-1:0]   base;

    if (d == 1) begin : g_src0
      assign src = llr_ch;
    end else begin : g_srcn
      assign src = g_st[d-1].lvl_q;
    end

    always_comb begin
      branch = idx_q[M-d];
      base   = $clog2(N)'(((int'(idx_q) >> (M - d)) & ~1) * SZ);
      u_sib  = u_dec[base +: SZ];
    end

    sc_f_layer #(.M(SZ), .Q(Q)) u_fl  (.llr_i(src), .llr_o(f_out));
    polar_enc  #(.M(SZ))        u_enc (.u_i(u_sib), .x_o(v));
    sc_g_layer #(.M(SZ), .Q(Q)) u_gl  (.llr_i(src), .v_i(v), .ps_en(1'b1), .llr_o(g_out));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                             lvl_q <= '0;
      else if (active && cur_d == DW'(d))     lvl_q <= branch ? g_out : f_out;
    end
  end

  assign lambda_o = g_st[M].lvl_q;
  assign busy     = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q  <= '0;
      cur_d  <= '0;
      active <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          idx_q  <= idx;
          cur_d  <= first_stage(idx);
          active <= 1'b1;
        end
      end else if (cur_d == DW'(M)) begin
        active <= 1'b0;
        done   <= 1'b1;
      end else begin
        cur_d <= cur_d + 1'b1;
      end
    end
  end

  // a new component code may only be requested when the previous one is done
  a_no_start_while_busy: assert property (@(posedge clk)
                                          start |-> !active);
endmodule
