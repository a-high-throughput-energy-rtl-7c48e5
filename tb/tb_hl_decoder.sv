// tb_hl_decoder: the hybrid-logic decoder at N = 64, N' = 8, COMB_WAIT = 3.
// Random, noiseless and noisy codewords with random frozen-bit vectors are
// decoded and compared with the reference SC decoder (a hybrid decoder must
// give exactly the SC decisions). The latency from the start edge to done
// must be sum_i (1 + k_i + COMB_WAIT) = 46 clocks here, with k_0 = 3 and
// k_i = tz(i)+1 recomputed tree stages.
module tb_hl_decoder;
  import polar_ref_pkg::*;
  localparam int N = 64, NP = 8, Q = 5, W = 3, T_EXP = 46;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [N-1:0][Q-1:0] llr_in;
  logic [N-1:0]        frz_in, u_out;
  int checks = 0, failures = 0;

  hl_decoder #(.N(N), .NP(NP), .Q(Q), .COMB_WAIT(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  l[];
    bit  f[], ue[], ud[], xd[];
    l = new[N]; f = new[N]; ud = new[N];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cw = 0; cw < 60; cw++) begin
      int waited;
      for (int k = 0; k < N; k++) f[k] = ($urandom_range(99, 0) < 50);
      for (int k = 0; k < N; k++) ud[k] = $urandom & f[k];
      encode(ud, xd);
      for (int k = 0; k < N; k++) begin
        case (cw % 3)
          0: l[k] = rand_llr(Q);
          1: l[k] = clean_llr(Q, xd[k]);
          default: l[k] = clean_llr(Q, xd[k] ^ ($urandom_range(99, 0) < 8));
        endcase
        llr_in[k] = Q'(l[k]);
        frz_in[k] = f[k];
      end
      sc_decode(Q, l, f, ue);
      start = 1;
      @(negedge clk);
      start = 0;
      llr_in = '0;
      waited = 0;
      while (!done && waited < 500) begin
        @(negedge clk);
        waited++;
      end
      checks++;
      if (waited != T_EXP) begin
        failures++;
        $display("cw %0d: done after %0d clocks, expected %0d", cw, waited, T_EXP);
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if (u_out[k] !== ue[k]) failures++;
        if (cw % 3 == 1) begin
          checks++;
          if (u_out[k] !== ud[k]) failures++;
        end
      end
      if (failures > 0 && failures < 4) $display("cw %0d u=%h", cw, u_out);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
