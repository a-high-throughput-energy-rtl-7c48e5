// tb_comb_dec4: the N = 4 decoder cell against the reference SC decoder for
// random LLRs and random frozen-bit vectors, plus noiseless codewords that
// must decode back to the transmitted data. Also checks that a frozen bit
// always decodes to 0.
module tb_comb_dec4;
  import polar_ref_pkg::*;
  localparam int Q = 5;
  logic [3:0][Q-1:0] li;
  logic [3:0]        a, u;
  int checks = 0, failures = 0;

  comb_dec4 #(.Q(Q)) dut (.llr_i(li), .frz_i(a), .u_o(u));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  l[];
    bit  f[], ue[], ud[], xd[];
    l = new[4]; f = new[4]; ud = new[4];
    for (int t = 0; t < 3000; t++) begin
      a = 4'($urandom);
      for (int k = 0; k < 4; k++) f[k] = a[k];
      if (t % 2 == 0) begin
        for (int k = 0; k < 4; k++) l[k] = rand_llr(Q);
      end else begin
        for (int k = 0; k < 4; k++) ud[k] = $urandom & a[k];
        encode(ud, xd);
        for (int k = 0; k < 4; k++) l[k] = clean_llr(Q, xd[k]);
      end
      for (int k = 0; k < 4; k++) li[k] = Q'(l[k]);
      #1;
      sc_decode(Q, l, f, ue);
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (u[k] !== ue[k]) failures++;
        if (t % 2 == 1) begin
          checks++;
          if (u[k] !== ud[k]) failures++;
        end
        if (!a[k]) begin
          checks++;
          if (u[k] !== 1'b0) failures++;
        end
      end
      if (failures > 0 && failures < 5) $display("t=%0d l=%p a=%b u=%b exp=%p", t, l, a, u, ue);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
