// tb_sc_g_layer: random LLR pairs and partial sums through an 8-wide g layer
// (Q = 5) with the partial-sum gate both open and closed. Expected words come
// from the reference g (integer add/subtract, saturate, back to
// sign-magnitude); with the gate closed every node must behave as v = 0.
module tb_sc_g_layer;
  import polar_ref_pkg::*;
  localparam int M = 8, Q = 5;
  logic [2*M-1:0][Q-1:0] li;
  logic [M-1:0]          v;
  logic                  en;
  logic [M-1:0][Q-1:0]   lo;
  int checks = 0, failures = 0;

  sc_g_layer #(.M(M), .Q(Q)) dut (.llr_i(li), .v_i(v), .ps_en(en), .llr_o(lo));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 600; t++) begin
      for (int k = 0; k < 2*M; k++) li[k] = Q'(rand_llr(Q));
      v  = M'($urandom);
      en = (t % 4 != 0);
      #1;
      for (int k = 0; k < M; k++) begin
        int e;
        e = ref_g(Q, int'(li[2*k]), int'(li[2*k+1]), int'(v[k] & en));
        checks++;
        if (int'(lo[k]) != e) begin
          failures++;
          if (failures < 10) $display("g mismatch k=%0d %h %h v=%b en=%b -> %h exp %h",
                                      k, li[2*k], li[2*k+1], v[k], en, lo[k], e);
        end
      end
    end
    if (sat_count == 0) begin failures++; $display("no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
