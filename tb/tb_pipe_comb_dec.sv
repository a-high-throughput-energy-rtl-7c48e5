// tb_pipe_comb_dec: the single-stage pipelined decoder at N = 32 fed with a
// stream of codewords (mostly back-to-back, so two codewords are in flight,
// with occasional idle cycles). Frozen-bit vectors differ from codeword to
// codeword. Each decision vector must appear exactly two clocks after its
// codeword is loaded, one per clock, and match the reference SC decoder.
module tb_pipe_comb_dec;
  import polar_ref_pkg::*;
  localparam int N = 32, Q = 5, LAT = 2, NCW = 60;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N-1:0][Q-1:0] llr_in;
  logic [N-1:0]        frz_in, u_out;
  int checks = 0, failures = 0, cyc = 0, issued = 0, received = 0, overlap = 0;
  bit exp_v[int];
  logic [N-1:0] exp_u[int];

  pipe_comb_dec #(.N(N), .Q(Q)) dut (.clk, .rst_n, .in_valid, .llr_in, .frz_in, .out_valid, .u_out);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  // codewords in flight together: stage A and stage B both busy
  always @(posedge clk) if (dut.vld_q && dut.vld_p) overlap++;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  l[];
    bit  f[], ue[];
    l = new[N]; f = new[N];
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (issued < NCW || received < NCW) begin
      @(negedge clk);
      // check what left the output register after the last edge
      checks++;
      if (out_valid !== exp_v.exists(cyc)) begin
        failures++;
        $display("cyc %0d out_valid=%b expected %b", cyc, out_valid, exp_v.exists(cyc));
      end
      if (out_valid && exp_v.exists(cyc)) begin
        received++;
        checks++;
        if (u_out !== exp_u[cyc]) begin
          failures++;
          $display("cyc %0d u=%h exp %h", cyc, u_out, exp_u[cyc]);
        end
      end
      // next input, captured at edge cyc+1, output after edge cyc+1+LAT
      if (issued < NCW && ($urandom_range(9, 0) != 0)) begin
        for (int k = 0; k < N; k++) begin
          l[k] = rand_llr(Q);
          f[k] = $urandom_range(1, 0);
          llr_in[k] = Q'(l[k]);
          frz_in[k] = f[k];
        end
        sc_decode(Q, l, f, ue);
        for (int k = 0; k < N; k++) exp_u[cyc + 1 + LAT][k] = ue[k];
        exp_v[cyc + 1 + LAT] = 1;
        in_valid = 1;
        issued++;
      end else begin
        in_valid = 0;
        llr_in = '0;
      end
    end
    if (overlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
