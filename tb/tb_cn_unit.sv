// tb_cn_unit - checks one check node over several periods with two frames
// in flight.
//
// The testbench plays the controller: in every period of 2L + 1 clocks it
// issues all layers of one slot to stage 1 (APP values one clock after the
// issue) and of the other slot to stage 2, alternating slots. Its model of
// offset min-sum (v2c = APP - old message, minima over connected edges,
// offset 1, sign product) predicts every C2V message of stage 2, including
// the subtraction of the node's own messages from the previous pass, and the
// row parity of stage 1. A fresh stage 2 must send zeros.
module tb_cn_unit;
  import ldpc_pkg::*;
  localparam int NL = 6;
  localparam int L  = 5;
  localparam int NE = int'(NEDGE);   // 27

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                  en, s1_iss, s1_slot, half, conn_ext, s2_iss, s2_slot, s2_fresh;
  logic [$clog2(NL)-1:0] layer;
  logic [NHALF-1:0]      conn;
  msg_t                  app [NHALF];
  msg_t                  app_ext, c2v_ext;
  msg_t                  c2v [NHALF];
  logic                  row_ok_vld, row_ok;

  cn_unit #(.NL(NL)) dut (.*);

  int checks = 0, failures = 0, n_fail_par = 0, n_pass_par = 0, n_neg = 0, n_zero = 0;

  bit  g_conn [NL][NE];
  int  m_app  [2][NL][NE];
  int  m_old  [2][NL][NE];   // messages of the last stage 2 (node memory)
  int  m_exp  [2][NL][NE];   // messages the next stage 2 must send
  bit  m_par  [2][NL];

  function automatic int sat(int v);
    return v > 15 ? 15 : (v < -15 ? -15 : v);
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", s);
    end
  endtask

  function automatic void model_stage1(int s);
    for (int l = 0; l < L; l++) begin
      int v [NE];
      int m1, m2, sp;
      bit p;
      m1 = 15; m2 = 15; sp = 0; p = 0;
      for (int e = 0; e < NE; e++) begin
        int a;
        v[e] = sat(m_app[s][l][e] - m_old[s][l][e]);
        if (!g_conn[l][e]) continue;
        a = v[e] < 0 ? -v[e] : v[e];
        if (v[e] < 0) sp ^= 1;
        p ^= (m_app[s][l][e] < 0);
        if (a < m1) begin m2 = m1; m1 = a; end
        else if (a < m2) m2 = a;
      end
      m_par[s][l] = p;
      for (int e = 0; e < NE; e++) begin
        int a, m;
        a = v[e] < 0 ? -v[e] : v[e];
        m = (g_conn[l][e] && a == m1) ? m2 : m1;
        m = m > int'(OFFSET) ? m - int'(OFFSET) : 0;
        m_exp[s][l][e] = (sp ^ (g_conn[l][e] && v[e] < 0)) ? -m : m;
      end
    end
  endfunction

  initial begin
    bit act [2];
    bit fr  [2];
    en = 1; s1_iss = 0; s2_iss = 0; s1_slot = 0; s2_slot = 0; s2_fresh = 0;
    half = 0; layer = 0; conn = 0; conn_ext = 0; app_ext = 0;
    for (int k = 0; k < int'(NHALF); k++) app[k] = 0;
    for (int l = 0; l < NL; l++)
      for (int e = 0; e < NE; e++)
        g_conn[l][e] = (e == NE - 1) ? (l >= 2) : ($urandom_range(0, 3) != 0);
    act = '{0, 0};
    fr  = '{0, 0};
    for (int p = 0; p < 10; p++) begin
      int ph, s1, s2;
      ph = p % 2;
      s1 = ph; s2 = 1 - ph;
      // slot s2 starts (fresh) the first time it is in stage 2
      if (!act[s2]) begin act[s2] = 1; fr[s2] = 1; end
      // new APP values for the stage-1 slot
      for (int l = 0; l < L; l++)
        for (int e = 0; e < NE; e++) m_app[s1][l][e] = int'($urandom_range(0, 30)) - 15;
      if (act[s1] && !fr[s1]) begin
        model_stage1(s1);
        for (int l = 0; l < L; l++) if (m_par[s1][l]) n_fail_par++; else n_pass_par++;
      end
      for (int c = 0; c <= 2 * L; c++) begin
        int l, h;
        @(negedge clk);
        l = c / 2; h = c % 2;
        s1_iss = (c < 2 * L) && act[s1] && !fr[s1];
        s2_iss = (c < 2 * L);
        s1_slot = s1[0]; s2_slot = s2[0]; s2_fresh = fr[s2];
        layer = ($clog2(NL))'(l); half = h[0];
        for (int k = 0; k < int'(NHALF); k++) conn[k] = g_conn[l % NL][h * int'(NHALF) + k];
        conn_ext = g_conn[l % NL][NE - 1];
        if (c > 0) begin
          int pl, phh;
          pl = (c - 1) / 2; phh = (c - 1) % 2;
          for (int k = 0; k < int'(NHALF); k++) app[k] = msg_t'(m_app[s1][pl][phh * int'(NHALF) + k]);
          app_ext = msg_t'(m_app[s1][pl][NE - 1]);
        end
        #1;
        if (s2_iss) begin
          for (int k = 0; k < int'(NHALF); k++) begin
            int e, x;
            e = h * int'(NHALF) + k;
            x = fr[s2] ? 0 : m_exp[s2][l][e];
            if (g_conn[l][e]) begin
              chk(int'(c2v[k]) == x, $sformatf("p%0d l%0d e%0d: %0d vs %0d", p, l, e, c2v[k], x));
              if (x < 0) n_neg++;
              if (x == 0) n_zero++;
            end
          end
          if (h == 1 && g_conn[l][NE - 1])
            chk(int'(c2v_ext) == (fr[s2] ? 0 : m_exp[s2][l][NE - 1]), "extended edge message");
        end
        if (c > 0 && (c - 1) % 2 == 1 && act[s1] && !fr[s1]) begin
          chk(row_ok_vld && row_ok == !m_par[s1][(c - 1) / 2], "row parity");
        end
      end
      // end of period: update the models
      for (int l = 0; l < L; l++)
        for (int e = 0; e < NE; e++) m_old[s2][l][e] = fr[s2] ? 0 : m_exp[s2][l][e];
      fr[s2] = 0;
    end
    chk(n_fail_par > 0 && n_pass_par > 0 && n_neg > 0 && n_zero > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
