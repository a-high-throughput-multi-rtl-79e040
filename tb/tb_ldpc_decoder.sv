// tb_ldpc_decoder - end-to-end test of the decoder at its default size.
//
// Sends noisy all-zero codewords (the all-zero word is a codeword of every
// LDPC code) through the decoder in all three parallelism modes, with short
// (rate 11/12) and long (rate 1/3) codes, low noise (early termination) and
// heavy noise (iteration limit), and two slots in flight at once. Every
// result is compared bit for bit with a behavioural flooding offset min-sum
// decoder written here from the algorithm (same 5-bit saturating arithmetic,
// same layer order of the VN sums), independent of the RTL's structure:
// hard decisions of all active lanes, iteration count and per-frame parity
// flag. It also checks the period length (2L + 1 clocks, so 18 clocks per
// iteration at rate 11/12) and the latency from frame start to result, and
// runs rate 1/3 frames with the early start (decoding begins while the
// extended columns are still being loaded).
module tb_ldpc_decoder;
  import ldpc_pkg::*;

  localparam int MAXF = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [ZBITS-1:0]        cfg_z;
  par_t                    cfg_par;
  logic [$clog2(NLAYER):0] cfg_layers;
  logic                    cfg_early;
  logic                    ld_valid, ld_ready, ld_last, ld_slot;
  logic [6:0]              ld_col;
  msg_t                    ld_llr [ZMAX];
  logic                    dec_valid, dec_slot;
  logic [3:0]              dec_iters, dec_seg_ok;
  logic [ZMAX-1:0]         dec_bits [NCOL_M];
  logic                    period_start, frame_start, frame_slot;

  ldpc_decoder dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------------------------------------------------------------
  // reference decoder
  // ---------------------------------------------------------------------
  int   r_z, r_segw, r_L, r_nseg;
  byte  llr  [NCOL][ZMAX];
  byte  c2v  [NLAYER][NCOL][ZMAX];   // message row -> variable, by VN lane
  byte  app  [NCOL][ZMAX];

  function automatic byte sat(int v);
    if (v > 15) return 15;
    if (v < -15) return -15;
    return byte'(v);
  endfunction

  function automatic int vlane(int l, int j, int r);   // CN lane r -> VN lane
    int base, sv;
    base = (r / r_segw) * r_segw;
    sv   = bg_value(l, j) % r_z;
    if (j >= int'(NCOL_M)) sv = 0;
    return base + ((r - base) + sv) % r_z;
  endfunction

  function automatic bit lane_on(int i);
    return (i % r_segw) < r_z && (i / r_segw) < r_nseg;
  endfunction

  function automatic void ref_app();
    for (int j = 0; j < int'(NCOL); j++)
      for (int k = 0; k < int'(ZMAX); k++) begin
        int acc;
        acc = llr[j][k];
        for (int l = 0; l < r_L; l++)
          if (bg_value(l, j) >= 0) acc = sat(acc + c2v[l][j][k]);
        app[j][k] = byte'(acc);
      end
  endfunction

  // Returns the per-segment parity flags.
  function automatic bit [3:0] ref_check();
    bit [3:0] ok;
    ok = '0;
    for (int s = 0; s < r_nseg; s++) ok[s] = 1'b1;
    for (int l = 0; l < r_L; l++)
      for (int r = 0; r < int'(ZMAX); r++) begin
        bit p;
        if (!lane_on(r)) continue;
        p = 0;
        for (int j = 0; j < int'(NCOL); j++)
          if (bg_value(l, j) >= 0) p ^= (app[j][vlane(l, j, r)] < 0);
        if (p) ok[r / r_segw] = 1'b0;
      end
    return ok;
  endfunction

  function automatic void ref_cn();
    byte nc2v [NLAYER][NCOL][ZMAX];
    nc2v = c2v;
    for (int l = 0; l < r_L; l++)
      for (int r = 0; r < int'(ZMAX); r++) begin
        int m1, m2, sp, cnt;
        int vv [NCOL];
        if (!lane_on(r)) continue;
        m1 = 99; m2 = 99; sp = 0;
        for (int j = 0; j < int'(NCOL); j++) begin
          int k, v, a;
          if (bg_value(l, j) < 0) continue;
          k = vlane(l, j, r);
          v = sat(app[j][k] - c2v[l][j][k]);
          vv[j] = v;
          a = v < 0 ? -v : v;
          if (v < 0) sp ^= 1;
          if (a < m1) begin m2 = m1; m1 = a; end
          else if (a < m2) m2 = a;
        end
        for (int j = 0; j < int'(NCOL); j++) begin
          int k, a, m, sg;
          if (bg_value(l, j) < 0) continue;
          k  = vlane(l, j, r);
          a  = vv[j] < 0 ? -vv[j] : vv[j];
          m  = (a == m1) ? m2 : m1;      // equal minima give the same value
          m  = (m > int'(OFFSET)) ? m - int'(OFFSET) : 0;
          sg = sp ^ (vv[j] < 0);
          nc2v[l][j][k] = byte'(sg ? -m : m);
        end
      end
    c2v = nc2v;
  endfunction

  // expected results per frame
  logic [ZMAX-1:0] e_bits  [MAXF][NCOL_M];
  int              e_iters [MAXF];
  bit [3:0]        e_ok    [MAXF];
  byte             f_llr   [MAXF][NCOL][ZMAX];
  int              f_slot  [MAXF];
  int              f_L     [MAXF];
  longint          f_start [MAXF];
  bit              f_done  [MAXF];
  int              nframes;

  function automatic void ref_decode(int f);
    int it;
    bit [3:0] ok, mask;
    llr = f_llr[f];
    for (int l = 0; l < int'(NLAYER); l++)
      for (int j = 0; j < int'(NCOL); j++)
        for (int k = 0; k < int'(ZMAX); k++) c2v[l][j][k] = 0;
    mask = 4'((1 << r_nseg) - 1);
    it = 0;
    forever begin
      ref_app();
      ok = ref_check();
      if (ok == mask || it == int'(MAX_ITER)) break;
      ref_cn();
      it++;
    end
    e_iters[f] = it;
    e_ok[f]    = ok;
    for (int j = 0; j < int'(NCOL_M); j++)
      for (int k = 0; k < int'(ZMAX); k++) e_bits[f][j][k] = (app[j][k] < 0);
  endfunction

  // ---------------------------------------------------------------------
  // stimulus
  // ---------------------------------------------------------------------
  int n_early = 0, n_maxit = 0, n_par1 = 0, n_par2 = 0, n_par4 = 0;
  int n_disabled = 0, n_evn = 0, n_both = 0, n_sat = 0, n_estart = 0;

  function automatic void make_frame(int f, int flip_pm);
    for (int j = 0; j < int'(NCOL); j++)
      for (int k = 0; k < int'(ZMAX); k++) begin
        int v;
        v = 4 + int'($urandom_range(0, 5));
        if (int'($urandom_range(0, 999)) < flip_pm) v = -v;
        if (j < 2) v = 0;                     // punctured columns
        if (v >= 9) n_sat++;
        f_llr[f][j][k] = byte'(v);
      end
  endfunction

  task automatic load_frame(int f);
    int ncol;
    ncol = r_L + 22;
    // with the early start, time the load so that the mother code is in
    // shortly before a period ends: the frame then starts mid-load
    if (cfg_early) begin
      @(negedge clk);
      while (!period_start) @(negedge clk);
      repeat (2 * r_L + 1 - 30) @(negedge clk);
    end
    for (int c = 0; c < ncol; c++) begin
      @(negedge clk);
      ld_valid = 1'b1;
      ld_col   = 7'(c);
      ld_last  = (c == ncol - 1);
      for (int k = 0; k < int'(ZMAX); k++) ld_llr[k] = msg_t'(f_llr[f][c][k]);
      while (!ld_ready) @(negedge clk);
      if (c == 0) f_slot[f] = int'(ld_slot);
      @(posedge clk);
    end
    if (f_start[f] >= 0) n_estart++;          // decoding began during the load
    @(negedge clk);
    ld_valid = 1'b0;
    ld_last  = 1'b0;
  endtask

  // result monitor
  always @(negedge clk) begin
    if (frame_start) begin
      for (int f = 0; f < nframes; f++)
        if (!f_done[f] && f_slot[f] == int'(frame_slot) && f_start[f] < 0) begin
          f_start[f] = cyc;
          break;
        end
    end
    if (dec_valid) begin
      int f;
      f = -1;
      for (int i = 0; i < nframes; i++)
        if (!f_done[i] && f_start[i] >= 0 && f_slot[i] == int'(dec_slot)) begin f = i; break; end
      check(f >= 0, "result without a frame");
      if (f >= 0) begin
        int bad;
        bad = 0;
        f_done[f] = 1;
        for (int j = 0; j < int'(NCOL_M); j++)
          for (int k = 0; k < int'(ZMAX); k++)
            if (lane_on(k) && dec_bits[j][k] !== e_bits[f][j][k]) bad++;
        check(bad == 0, $sformatf("frame %0d: %0d wrong bits", f, bad));
        check(int'(dec_iters) == e_iters[f],
              $sformatf("frame %0d: iterations %0d, expected %0d", f, dec_iters, e_iters[f]));
        check(dec_seg_ok == e_ok[f],
              $sformatf("frame %0d: parity flags %b, expected %b", f, dec_seg_ok, e_ok[f]));
        check(cyc - f_start[f] == longint'((2 + 2 * e_iters[f]) * (2 * f_L[f] + 1) + 1),
              $sformatf("frame %0d: latency %0d", f, cyc - f_start[f]));
        if (e_ok[f] == 4'((1 << r_nseg) - 1) && e_iters[f] < int'(MAX_ITER)) n_early++;
        if (e_iters[f] == int'(MAX_ITER)) n_maxit++;
        $display("frame %0d slot %0d: %0d iterations, parity %b, %0d clocks",
                 f, dec_slot, dec_iters, dec_seg_ok, cyc - f_start[f]);
      end
    end
    if (dut.u_ctrl.st[0] == 2'd2 && dut.u_ctrl.st[1] == 2'd2) n_both++;
  end

  // period length
  longint last_ps = -1;
  always @(negedge clk) begin
    if (period_start && rst_n) begin
      if (last_ps >= 0 && cyc - last_ps != 1)
        check(cyc - last_ps == longint'(2 * int'(cfg_layers) + 1), "period length");
      last_ps = cyc;
    end
  end

  task automatic run_case(par_t par, int z, int L, int nf, int flip_pm, bit early = 0);
    int first;
    cfg_early  = early;
    cfg_par    = par;
    cfg_z      = ZBITS'(z);
    cfg_layers = ($clog2(NLAYER)+1)'(L);
    r_z    = z;
    r_L    = L;
    r_nseg = (par == PAR4) ? 4 : (par == PAR2) ? 2 : 1;
    r_segw = int'(ZMAX) / r_nseg;
    if (z < r_segw) n_disabled++;
    if (L > int'(NCORE)) n_evn++;
    case (par) PAR1: n_par1++; PAR2: n_par2++; default: n_par4++; endcase
    last_ps = -1;
    first = nframes;
    for (int i = 0; i < nf; i++) begin
      int f;
      f = nframes++;
      f_done[f] = 0; f_start[f] = -1; f_L[f] = L;
      make_frame(f, flip_pm);
      ref_decode(f);
      load_frame(f);
    end
    // wait for all frames of this case
    for (int t = 0; t < 200000; t++) begin
      bit all;
      all = 1;
      for (int f = first; f < nframes; f++) all &= f_done[f];
      if (all) break;
      @(posedge clk);
    end
    for (int f = first; f < nframes; f++) check(f_done[f], $sformatf("frame %0d never finished", f));
    repeat (3) @(posedge clk);
  endtask

  initial begin
    ld_valid = 0; ld_last = 0; ld_col = 0; cfg_early = 0;
    for (int k = 0; k < int'(ZMAX); k++) ld_llr[k] = '0;
    nframes = 0;
    cfg_par = PAR1; cfg_z = 7'd96; cfg_layers = 4;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    run_case(PAR1, 96, 4, 2, 2);     // rate 11/12, Z = 96, two slots
    run_case(PAR2, 40, 6, 2, 6);     // two decoders of Z = 40
    run_case(PAR4, 20, 8, 2, 4);     // four decoders of Z = 20: 8 frames
    run_case(PAR1, 64, 46, 1, 30);   // rate 1/3, unused lanes disabled
    run_case(PAR1, 96, 4, 1, 350);   // heavy noise: iteration limit
    run_case(PAR1, 96, 24, 1, 10);   // rate 1/2, Z = 96
    run_case(PAR1, 96, 46, 2, 20, 1); // rate 1/3, Z = 96, early start

    check(n_early > 0, "early termination never happened");
    check(n_maxit > 0, "iteration limit never reached");
    check(n_par1 > 0 && n_par2 > 0 && n_par4 > 0, "a parallelism mode was not used");
    check(n_disabled > 0, "no disabled lanes");
    check(n_evn > 0, "extended VNs never used");
    check(n_both > 0, "two slots never active together");
    check(n_sat > 0, "no large LLRs");
    check(n_estart > 0, "early start never used");
    $display("mechanisms: early=%0d maxit=%0d par1=%0d par2=%0d par4=%0d disabled=%0d evn=%0d two_slots=%0d early_start=%0d",
             n_early, n_maxit, n_par1, n_par2, n_par4, n_disabled, n_evn, n_both, n_estart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
