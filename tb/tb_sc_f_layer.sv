// tb_sc_f_layer: random vectors through an 8-wide min-sum f layer (Q = 5),
// every output word compared with the reference f (sign XOR, minimum
// magnitude). Includes equal-magnitude and zero-magnitude cases.
module tb_sc_f_layer;
  import polar_ref_pkg::*;
  localparam int M = 8, Q = 5;
  logic [2*M-1:0][Q-1:0] li;
  logic [M-1:0][Q-1:0]   lo;
  int checks = 0, failures = 0;

  sc_f_layer #(.M(M), .Q(Q)) dut (.llr_i(li), .llr_o(lo));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      for (int k = 0; k < 2*M; k++) li[k] = Q'(rand_llr(Q));
      if (t % 7 == 0) li[1] = {~li[0][Q-1], li[0][Q-2:0]};   // tie
      #1;
      for (int k = 0; k < M; k++) begin
        int e;
        e = ref_f(Q, int'(li[2*k]), int'(li[2*k+1]));
        checks++;
        if (int'(lo[k]) != e) begin
          failures++;
          if (failures < 10) $display("f mismatch k=%0d %h %h -> %h exp %h", k, li[2*k], li[2*k+1], lo[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
