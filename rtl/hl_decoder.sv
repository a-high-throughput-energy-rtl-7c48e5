// hl_decoder: hybrid-logic SC decoder of length N with a combinational
// accelerator of length NP (N' in the hybrid decoding algorithm).
//
// A codeword is decoded as K = N/NP component codes in order. For each one the
// synchronous part (hl_sync) computes the NP component LLRs lambda^(i) from the
// channel LLRs and the partial sums of the bits decoded so far; then a single
// combinational decoder of length NP (comb_dec) decodes it, using the slice
// a^(i) = a[i*NP +: NP] of the frozen-bit indicator vector. The synchronous
// side waits COMB_WAIT clock cycles, ceil(D_NP * f_c), for the combinational
// decoder to settle (a multicycle path from the stage-M registers of hl_sync
// to the decision register), captures the NP decisions and moves to the next
// component code.
// Interface: start (one cycle, while busy is low) loads llr_in and frz_in;
// done pulses for one cycle when u_out holds the decoded vector. Latency from
// the start edge to done is sum_i (1 + k_i + COMB_WAIT) cycles, with
// k_0 = log2(K) and k_i = tz(i)+1 stages recomputed for component code i.
// The handshake and reset are this design's choice.
module hl_decoder #(
  parameter int unsigned N         = polar_pkg::N_DEF,
  parameter int unsigned NP        = polar_pkg::NP_DEF,
  parameter int unsigned Q         = polar_pkg::Q_DEF,
  parameter int unsigned COMB_WAIT = polar_pkg::COMB_WAIT_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N-1:0][Q-1:0] llr_in,
  input  logic [N-1:0]        frz_in,
  output logic                busy,
  output logic                done,
  output logic [N-1:0]        u_out
);
  localparam int unsigned K  = N / NP;
  localparam int unsigned IW = $clog2(K);
  localparam int unsigned CW = $clog2(COMB_WAIT + 1);

  typedef enum logic [1:0] {S_IDLE, S_SYNC, S_COMB} state_t;

  state_t              state;
  logic [N-1:0][Q-1:0] llr_q;
  logic [N-1:0]        frz_q;
  logic [N-1:0]        u_q, u_next;
  logic [IW-1:0]       i_q;
  logic [CW-1:0]       cnt;
  logic                sync_start, sync_busy, sync_done, cap;
  logic [NP-1:0][Q-1:0] lambda;
  logic [NP-1:0]       frz_cur, u_comb;

  hl_sync #(.N(N), .NP(NP), .Q(Q)) u_sync (
    .clk, .rst_n, .start(sync_start), .idx(i_q), .llr_ch(llr_q), .u_dec(u_q),
    .busy(sync_busy), .done(sync_done), .lambda_o(lambda));

  comb_dec #(.N(NP), .Q(Q)) u_comb_dec (
    .llr_i(lambda), .frz_i(frz_cur), .ps_en(1'b1), .u_o(u_comb));

  always_comb begin
    frz_cur = frz_q[i_q*NP +: NP];
    u_next  = u_q;
    u_next[i_q*NP +: NP] = u_comb;
    // capture after COMB_WAIT cycles counted from the cycle lambda is valid
    cap = (state == S_SYNC && sync_done && COMB_WAIT == 1) ||
          (state == S_COMB && cnt == CW'(1));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      llr_q      <= '0;
      frz_q      <= '0;
      u_q        <= '0;
      u_out      <= '0;
      i_q        <= '0;
      cnt        <= '0;
      sync_start <= 1'b0;
      done       <= 1'b0;
    end else begin
      sync_start <= 1'b0;
      done       <= 1'b0;
      if (cap) begin
        u_q <= u_next;
        if (i_q == IW'(K - 1)) begin
          u_out <= u_next;
          done  <= 1'b1;
          state <= S_IDLE;
        end else begin
          i_q        <= i_q + 1'b1;
          sync_start <= 1'b1;
          state      <= S_SYNC;
        end
      end else begin
        case (state)
          S_IDLE: if (start) begin
            llr_q      <= llr_in;
            frz_q      <= frz_in;
            u_q        <= '0;
            i_q        <= '0;
            sync_start <= 1'b1;
            state      <= S_SYNC;
          end
          S_SYNC: if (sync_done) begin
            cnt   <= CW'(COMB_WAIT - 1);
            state <= S_COMB;
          end
          S_COMB: cnt <= cnt - 1'b1;
          default: state <= S_IDLE;
        endcase
      end
    end
  end
  // the controller only starts the synchronous part when it is idle
  a_sync_idle_at_start: assert property (@(posedge clk) sync_start |-> !sync_busy);
endmodule
