// tb_hl_sync: the synchronous stage unit at N = 64, N' = 8 (three tree
// stages). For each random codeword it visits component codes 0..7 in order,
// giving it the reference decisions of the earlier component codes (later
// bits are filled with random values, which must not matter), and checks the
// eight component LLRs against the reference tree walk, and that done comes
// (stages + 1) clocks after start with stages = 3 for i = 0 and tz(i)+1
// otherwise.
module tb_hl_sync;
  import polar_ref_pkg::*;
  localparam int N = 64, NP = 8, Q = 5, K = N / NP, M = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [M-1:0]         idx = '0;
  logic [N-1:0][Q-1:0]  llr_ch;
  logic [N-1:0]         u_dec;
  logic [NP-1:0][Q-1:0] lambda_o;
  int checks = 0, failures = 0;

  hl_sync #(.N(N), .NP(NP), .Q(Q)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  l[], lam[];
    bit  f[], ue[];
    l = new[N]; f = new[N];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cw = 0; cw < 40; cw++) begin
      for (int k = 0; k < N; k++) begin
        l[k] = rand_llr(Q);
        f[k] = $urandom_range(1, 0);
        llr_ch[k] = Q'(l[k]);
      end
      sc_decode(Q, l, f, ue);
      for (int i = 0; i < K; i++) begin
        int stages, waited;
        stages = (i == 0) ? M : 1;
        if (i != 0) begin
          int t;
          t = i;
          while ((t & 1) == 0) begin stages++; t >>= 1; end
        end
        for (int k = 0; k < N; k++) u_dec[k] = (k < i * NP) ? ue[k] : 1'($urandom);
        idx   = M'(i);
        start = 1;
        @(negedge clk);
        start = 0;
        waited = 1;
        while (!done && waited < 50) begin
          @(negedge clk);
          waited++;
        end
        checks++;
        if (waited != stages + 1) begin
          failures++;
          $display("i=%0d done after %0d cycles, expected %0d", i, waited, stages + 1);
        end
        node_llr(Q, l, ue, i * NP, NP, lam);
        for (int k = 0; k < NP; k++) begin
          checks++;
          if (int'(lambda_o[k]) != lam[k]) begin
            failures++;
            if (failures < 10) $display("cw %0d i=%0d lambda[%0d]=%h exp %h", cw, i, k, lambda_o[k], lam[k]);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
