// tb_comb_dec: the combinational decoder at N = 64, Q = 5, against the
// reference SC decoder: random (very noisy) LLRs, noiseless codewords that
// must decode exactly, and mildly noisy codewords; frozen-bit vectors change
// with every codeword. A second instance at N = 8 covers the smallest
// recursive case.
module tb_comb_dec;
  import polar_ref_pkg::*;
  localparam int Q = 5;
  int checks = 0, failures = 0;

  logic [63:0][Q-1:0] li64;
  logic [63:0]        a64, u64;
  logic [7:0][Q-1:0]  li8;
  logic [7:0]         a8, u8;

  comb_dec #(.N(64), .Q(Q)) dut64 (.llr_i(li64), .frz_i(a64), .ps_en(1'b1), .u_o(u64));
  comb_dec #(.N(8),  .Q(Q)) dut8  (.llr_i(li8),  .frz_i(a8),  .ps_en(1'b1), .u_o(u8));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int mode);
    int  l[];
    bit  f[], ue[], ud[], xd[];
    l = new[n]; f = new[n]; ud = new[n];
    for (int k = 0; k < n; k++) f[k] = ($urandom_range(99, 0) < 55);
    for (int k = 0; k < n; k++) ud[k] = $urandom & f[k];
    encode(ud, xd);
    for (int k = 0; k < n; k++) begin
      if (mode == 0)      l[k] = rand_llr(Q);
      else if (mode == 1) l[k] = clean_llr(Q, xd[k]);
      else                l[k] = clean_llr(Q, xd[k] ^ ($urandom_range(99, 0) < 8));
    end
    if (n == 64) begin
      for (int k = 0; k < n; k++) begin li64[k] = Q'(l[k]); a64[k] = f[k]; end
    end else begin
      for (int k = 0; k < n; k++) begin li8[k] = Q'(l[k]); a8[k] = f[k]; end
    end
    #1;
    sc_decode(Q, l, f, ue);
    for (int k = 0; k < n; k++) begin
      logic got = (n == 64) ? u64[k] : u8[k];
      checks++;
      if (got !== ue[k]) begin
        failures++;
        if (failures < 10) $display("N=%0d mode=%0d bit %0d got %b exp %b", n, mode, k, got, ue[k]);
      end
      if (mode == 1) begin
        checks++;
        if (got !== ud[k]) failures++;
      end
    end
  endtask

  initial begin
    for (int t = 0; t < 150; t++) begin
      run(64, t % 3);
      run(8, t % 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
