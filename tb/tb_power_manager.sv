// tb_power_manager: plays the 64 banks' counters for a sequence of intervals
// and compares the T and M fields after each interval with a reference model
// of the policy written here (power-on individual and collective, then
// Algorithm 1 with both branches). Scenarios are chosen so that every branch
// is taken: uniform, a drop of the mean over consecutive intervals, skewed
// accesses, misses on off banks, and random intervals. Also checks the
// interval length (snap every INTERVAL cycles) and the mean and deviation.
module tb_power_manager;
  import nfv_pkg::*;
  localparam int NB = 64;
  localparam int unsigned INTERVAL = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic snap;
  logic [CNT_W-1:0] cx [NB], ca [NB], cc [NB], ci [NB];
  logic [NB-1:0] t_on, m_discard;
  logic [CNT_W-1:0] last_mean, last_std;
  logic [15:0] n_intervals, n_nonuniform, n_consecutive, n_on_individual, n_on_collective;

  power_manager #(.NB(NB), .INTERVAL(INTERVAL), .N_OFF(16), .TH_IND_PM(7), .TH_T_PM(10)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- reference model ----------------------------------------------------
  bit [NB-1:0] m_t, m_m;
  int m_mu1 = 0, m_mu2 = 0, exp_mu, exp_sd;
  int e_ind = 0, e_coll = 0, e_i = 0, e_ii = 0;

  function automatic int isqrt(longint v);
    int r = 0;
    while (longint'(r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic model(input int vx[NB], input int va[NB], input int vc[NB], input int vi[NB]);
    bit [NB-1:0] jon = '0;
    int noff = 0;
    longint miss = 0, acc = 0, s1 = 0, s2 = 0, e2, var_;
    for (int i = 0; i < NB; i++)
      if (!m_t[i] && (vc[i] + vi[i]) * 1000 < 7 * va[i]) begin m_t[i] = 1; jon[i] = 1; end
    if (jon != 0) e_ind++;
    for (int i = 0; i < NB; i++) begin
      acc += va[i];
      if (!m_t[i]) begin noff++; miss += (va[i] > vc[i]) ? va[i] - vc[i] : 0; end
    end
    if (noff != 0 && miss * 1000 > 10 * acc && noff / 2 != 0) begin
      e_coll++;
      for (int k = 0; k < noff / 2; k++) begin
        int best = -1, bk = -1;
        for (int i = 0; i < NB; i++)
          if (!m_t[i] && ((va[i] > vc[i]) ? va[i] - vc[i] : 0) > bk) begin
            bk = (va[i] > vc[i]) ? va[i] - vc[i] : 0; best = i;
          end
        m_t[best] = 1; jon[best] = 1;
      end
    end
    for (int i = 0; i < NB; i++) begin s1 += vx[i]; s2 += longint'(vx[i]) * vx[i]; end
    exp_mu = int'(s1 / NB); e2 = s2 / NB;
    var_ = (e2 > longint'(exp_mu) * exp_mu) ? e2 - longint'(exp_mu) * exp_mu : 0;
    exp_sd = isqrt(var_);
    noff = 0;
    for (int i = 0; i < NB; i++) if (!m_t[i]) noff++;
    if (exp_sd > exp_mu) begin
      e_i++;
      for (int i = 0; i < NB; i++)
        if (vx[i] < exp_mu && !jon[i] && m_t[i]) begin m_t[i] = 0; m_m[i] = 1; end
    end else if (m_mu2 > 2 * exp_mu && noff < 16) begin
      e_ii++;
      for (int k = 0; k < 16 - noff; k++) begin
        int best = -1, bk = 1 << 20;
        for (int i = 0; i < NB; i++)
          if (m_t[i] && !jon[i] && vx[i] < bk) begin bk = vx[i]; best = i; end
        if (best >= 0) begin m_t[best] = 0; m_m[best] = 0; end
      end
    end
    m_mu2 = m_mu1; m_mu1 = exp_mu;
  endtask

  // ---- scenarios --------------------------------------------------------------
  int sx[NB], sa[NB], sc[NB], si[NB];
  task automatic scenario(input int k);
    for (int i = 0; i < NB; i++) begin
      case (k)
        0, 1: begin sa[i] = 1000 + (i * 7) % 13; sc[i] = 0; si[i] = 0; end
        2:    begin sa[i] = 300 + (i * 11) % 17; sc[i] = 0; si[i] = 0; end
        3:    begin  // off banks see misses; on banks uniform
                if (!m_t[i]) begin sa[i] = 500 + i; sc[i] = 300; si[i] = 0; end
                else begin sa[i] = 300; sc[i] = 0; si[i] = 0; end
              end
        4:    begin  // six hot banks, the off ones mostly compressed or a few with raw accesses
                sa[i] = (i % 11 == 0) ? 4000 : 40;
                sc[i] = (i % 11 == 0) ? 0 : 20;
                si[i] = 0;
                if (!m_t[i] && i % 2 == 0) begin sa[i] = 2000; sc[i] = 1; si[i] = 1; end
              end
        default: begin
                sa[i] = $urandom_range(0, 4095);
                sc[i] = $urandom_range(0, sa[i] / 2);
                si[i] = $urandom_range(0, sa[i] / 2);
              end
      endcase
      sx[i] = (sa[i] > sc[i] + si[i]) ? sa[i] - sc[i] - si[i] : 0;
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime last_snap = 0;
    for (int i = 0; i < NB; i++) begin cx[i] = '0; ca[i] = '0; cc[i] = '0; ci[i] = '0; end
    m_t = '1; m_m = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 14; k++) begin
      scenario(k);
      // wait for the interval end, then present the counters as the controllers would
      while (!snap) @(negedge clk);
      if (k > 0) chk($realtime - last_snap == INTERVAL * 10.0,
                     $sformatf("interval length %0t", $realtime - last_snap));
      last_snap = $realtime;
      for (int i = 0; i < NB; i++) begin
        cx[i] = CNT_W'(sx[i]); ca[i] = CNT_W'(sa[i]); cc[i] = CNT_W'(sc[i]); ci[i] = CNT_W'(si[i]);
      end
      model(sx, sa, sc, si);
      @(negedge clk);
      repeat (INTERVAL - 20) @(negedge clk);
      chk(t_on == m_t, $sformatf("interval %0d T: got %h exp %h", k, t_on, m_t));
      chk((m_discard | t_on) == (m_m | m_t), $sformatf("interval %0d M of off banks", k));
      chk(last_mean == CNT_W'(exp_mu) && last_std == CNT_W'(exp_sd),
          $sformatf("interval %0d mean %0d/%0d std %0d/%0d", k, last_mean, exp_mu, last_std, exp_sd));
    end
    chk(n_intervals == 14, "interval count");
    chk(n_nonuniform == 16'(e_i) && n_consecutive == 16'(e_ii) &&
        n_on_individual == 16'(e_ind) && n_on_collective == 16'(e_coll), "branch counts match model");
    chk(e_i > 0 && e_ii > 0 && e_ind > 0 && e_coll > 0,
        $sformatf("every branch taken: i=%0d ii=%0d ind=%0d coll=%0d", e_i, e_ii, e_ind, e_coll));
    $display("branches: nonuniform=%0d consecutive=%0d on_individual=%0d on_collective=%0d",
             e_i, e_ii, e_ind, e_coll);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
