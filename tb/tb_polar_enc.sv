// tb_polar_enc: the XOR network against the generator-matrix definition of
// the bit-reversed polar transform, for M = 16 (random words) and M = 4
// (all 16 inputs, also checked against the four partial sums
// u0^u1^u2^u3, u2^u3, u1^u3, u3 written out by hand).
module tb_polar_enc;
  import polar_ref_pkg::*;
  logic [15:0] u16, x16;
  logic [3:0]  u4, x4;
  int checks = 0, failures = 0;

  polar_enc #(.M(16)) dut16 (.u_i(u16), .x_o(x16));
  polar_enc #(.M(4))  dut4  (.u_i(u4),  .x_o(x4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ub[], xb[];
    for (int t = 0; t < 16; t++) begin
      u4 = 4'(t);
      #1;
      checks++;
      if (x4 !== {u4[3], u4[1]^u4[3], u4[2]^u4[3], ^u4}) begin
        failures++;
        $display("enc4 mismatch u=%b x=%b", u4, x4);
      end
    end
    for (int t = 0; t < 300; t++) begin
      u16 = 16'($urandom);
      #1;
      ub = new[16];
      for (int i = 0; i < 16; i++) ub[i] = u16[i];
      encode(ub, xb);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (x16[i] !== xb[i]) begin
          failures++;
          if (failures < 10) $display("enc16 mismatch u=%h bit %0d", u16, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
