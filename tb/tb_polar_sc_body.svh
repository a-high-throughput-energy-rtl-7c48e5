// Shared body of tb_polar_sc_top and tb_polar_sc_full; expects localparams
// N, NP, Q, W (COMB_WAIT) and NCW (number of codewords) and is followed by
// the instance of polar_sc_top named dut with .* connections.
  localparam int K = N / NP;
  logic clk = 0, rst_n = 0;
  logic cd_in_valid = 0, cd_ps_en = 1, cd_out_valid;
  logic pd_in_valid = 0, pd_out_valid;
  logic hl_start = 0, hl_busy, hl_done;
  logic [N-1:0][Q-1:0] cd_llr, pd_llr, hl_llr;
  logic [N-1:0]        cd_frz, pd_frz, hl_frz, cd_u, pd_u, hl_u;
  int checks = 0, failures = 0, cyc = 0;
  int n_gate = 0, n_overlap = 0, n_frzchg = 0, n_act = 0, n_partial = 0;

  int           cw_llr [NCW][N];
  bit           cw_frz [NCW][N];
  logic [N-1:0] cw_exp [NCW];
  logic [N-1:0] cw_dat [NCW];
  bit           cw_clean [NCW];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  // partial-sum gate low in the first half of every period
  always @(posedge clk) begin #1 cd_ps_en = 0; n_gate++; end
  always @(negedge clk) cd_ps_en = 1;
  // mechanism counters, observed inside the design
  always @(posedge clk) if (rst_n) begin
    if (dut.u_pd.vld_q && dut.u_pd.vld_p) begin
      n_overlap++;
      if (dut.u_pd.frz_q[N-1:N/2] != dut.u_pd.frz_p) n_frzchg++;
    end
    if (dut.u_hl.sync_done) n_act++;
    if (dut.u_hl.sync_start && dut.u_hl.i_q != 0) n_partial++;
  end

  initial begin
    repeat (200 * NCW * K + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_codewords();
    int  l[];
    bit  f[], ue[], ud[], xd[];
    l = new[N]; f = new[N]; ud = new[N];
    for (int c = 0; c < NCW; c++) begin
      for (int k = 0; k < N; k++) f[k] = ($urandom_range(99, 0) < 50);
      for (int k = 0; k < N; k++) ud[k] = $urandom & f[k];
      encode(ud, xd);
      for (int k = 0; k < N; k++) begin
        case (c % 3)
          0: l[k] = rand_llr(Q);
          1: l[k] = clean_llr(Q, xd[k]);
          default: l[k] = clean_llr(Q, xd[k] ^ ($urandom_range(99, 0) < 6));
        endcase
        cw_llr[c][k] = l[k];
        cw_frz[c][k] = f[k];
        cw_dat[c][k] = ud[k];
      end
      cw_clean[c] = (c % 3 == 1);
      sc_decode(Q, l, f, ue);
      for (int k = 0; k < N; k++) cw_exp[c][k] = ue[k];
    end
  endtask

  task automatic check_u(string who, int c, logic [N-1:0] got);
    checks++;
    if (got !== cw_exp[c]) begin
      failures++;
      $display("%s codeword %0d mismatch", who, c);
    end
    if (cw_clean[c]) begin
      checks++;
      if (got !== cw_dat[c]) begin
        failures++;
        $display("%s codeword %0d: noiseless word not recovered", who, c);
      end
    end
  endtask

  // streaming side: registered and pipelined combinational decoders
  initial begin
    int sent = 0, got_cd = 0, got_pd = 0;
    int cd_due[$], pd_due[$];
    make_codewords();
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (got_cd < NCW || got_pd < NCW) begin
      @(negedge clk);
      if (cd_out_valid) begin
        checks++;
        if (cd_due.size() == 0 || cd_due[0] != cyc) begin
          failures++; $display("cd output at wrong time, cycle %0d", cyc);
        end
        if (cd_due.size() != 0) void'(cd_due.pop_front());
        check_u("cd", got_cd, cd_u);
        got_cd++;
      end
      if (pd_out_valid) begin
        checks++;
        if (pd_due.size() == 0 || pd_due[0] != cyc) begin
          failures++; $display("pd output at wrong time, cycle %0d", cyc);
        end
        if (pd_due.size() != 0) void'(pd_due.pop_front());
        check_u("pd", got_pd, pd_u);
        got_pd++;
      end
      if (sent < NCW) begin
        for (int k = 0; k < N; k++) begin
          cd_llr[k] = Q'(cw_llr[sent][k]);
          cd_frz[k] = cw_frz[sent][k];
        end
        pd_llr = cd_llr;
        pd_frz = cd_frz;
        cd_in_valid = 1;
        pd_in_valid = 1;
        cd_due.push_back(cyc + 2);
        pd_due.push_back(cyc + 3);
        sent++;
      end else begin
        cd_in_valid = 0;
        pd_in_valid = 0;
      end
    end
    // hybrid side, one codeword at a time
    for (int c = 0; c < NCW; c++) begin
      int waited, t_exp;
      t_exp = 0;
      for (int i = 0; i < K; i++) begin
        int st, t;
        st = (i == 0) ? $clog2(K) : 1;
        t = i;
        if (i != 0) while ((t & 1) == 0) begin st++; t >>= 1; end
        t_exp += 1 + st + W;
      end
      for (int k = 0; k < N; k++) begin
        hl_llr[k] = Q'(cw_llr[c][k]);
        hl_frz[k] = cw_frz[c][k];
      end
      hl_start = 1;
      @(negedge clk);
      hl_start = 0;
      waited = 0;
      while (!hl_done && waited < 100 * K) begin
        @(negedge clk);
        waited++;
      end
      checks++;
      if (waited != t_exp) begin
        failures++;
        $display("hl codeword %0d: %0d clocks, expected %0d", c, waited, t_exp);
      end
      check_u("hl", c, hl_u);
    end
    $display("mechanisms: ps_gate=%0d pipe_overlap=%0d frz_change=%0d hl_activations=%0d hl_partial=%0d g_saturations=%0d",
             n_gate, n_overlap, n_frzchg, n_act, n_partial, sat_count);
    if (n_gate == 0 || n_overlap == 0 || n_frzchg == 0 || n_act != NCW * K ||
        n_partial == 0 || sat_count == 0) begin
      failures++;
      $display("a mechanism was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
