// tb_ctrl_unit - checks the control unit on its own.
//
// The testbench plays the host (loads frames through the slot handshake),
// the shift ROM (entries from the base-graph definition) and the check nodes
// (parity results). It checks: the period of 2L + 1 clocks and hence 18
// clocks per iteration at rate 11/12 (L = 4); shift values V mod Z and their
// complements; the one-clock-delayed VN controls; the fresh first period of
// a frame; early termination after the first clean check; the iteration
// limit when a check keeps failing; the latency from frame start to done;
// and two frames in flight in the two slots.
module tb_ctrl_unit;
  import ldpc_pkg::*;
  localparam int MAXIT = 3;
  localparam int L = 4;
  localparam int Z = 72;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [ZBITS-1:0]        cfg_z;
  par_t                    cfg_par;
  logic [$clog2(NLAYER):0] cfg_layers;
  logic ld_valid, ld_last, ld_ready, ld_slot;
  logic cfg_early;
  logic [6:0] ld_col;
  logic [$clog2(NLAYER)-1:0] layer;
  logic half;
  bg_entry_t rom_ent [NHALF];
  logic s1_iss, s1_slot, s2_iss, s2_slot, s2_fresh;
  logic [NHALF-1:0] conn, vn_conn;
  logic conn_ext;
  logic [ZBITS-1:0] sv_fwd [NHALF];
  logic [ZBITS-1:0] sv_bwd [NHALF];
  logic evn_wr, evn_rd;
  logic [$clog2(NEXT)-1:0] evn_addr;
  logic vn_upd, vn_half, vn_first, vn_last, vn_slot;
  logic [3:0] seg_ok;
  logic capture, period_start, frame_start, done, done_slot;
  logic [3:0] done_iters, done_seg_ok;

  ctrl_unit #(.MAXIT(MAXIT)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, s);
    end
  endtask

  // shift ROM model
  always_comb
    for (int g = 0; g < int'(NHALF); g++) begin
      int v;
      v = bg_value(int'(layer), g + (half ? int'(NHALF) : 0));
      rom_ent[g].valid = (v >= 0);
      rom_ent[g].v     = (v >= 0) ? VBITS'(v) : '0;
    end

  // check-node model: slot 1 frames always fail the parity check when bad[1]
  bit bad [2];
  always_comb seg_ok = (bad[dut.ph]) ? 4'b1110 : 4'b1111;

  // monitors
  longint ps_last = -1, st_start [2], s1_first [2];
  int     n_done = 0, n_early = 0, n_limit = 0, n_both = 0, n_fresh = 0, exp_it [2];
  logic   p_iss, p_first_layer, p_last_layer, p_half;
  logic [NHALF-1:0] p_conn;
  always @(negedge clk) if (rst_n) begin
    if (period_start) begin
      if (ps_last >= 0) chk(cyc - ps_last == 2 * L + 1, "period length");
      ps_last = cyc;
    end
    for (int g = 0; g < int'(NHALF); g++) begin
      int v;
      v = bg_value(int'(layer), g + (half ? int'(NHALF) : 0));
      if (v >= 0 && (s1_iss || s2_iss)) begin
        chk(int'(sv_fwd[g]) == v % Z, "forward shift");
        chk(int'(sv_bwd[g]) == (Z - v % Z) % Z, "backward shift");
      end
      chk(conn[g] == (v >= 0), "connection");
    end
    // VN controls one clock later
    if (p_iss) begin
      chk(vn_upd && vn_first == p_first_layer && vn_last == p_last_layer && vn_half == p_half
          && vn_conn == p_conn, "VN controls");
    end
    p_iss = s2_iss; p_first_layer = (layer == 0); p_last_layer = (int'(layer) == L - 1);
    p_half = half; p_conn = conn;
    if (s2_iss && s2_fresh && layer == 0 && !half) n_fresh++;
    if (s1_iss && s2_iss) n_both++;
    if (frame_start) st_start[dut.ph] = cyc;
    if (done) begin
      n_done++;
      chk(int'(done_iters) == exp_it[done_slot], $sformatf("iterations %0d", done_iters));
      chk(cyc - st_start[done_slot] == (2 + 2 * exp_it[done_slot]) * (2 * L + 1),
          $sformatf("latency %0d", cyc - st_start[done_slot]));
      if (int'(done_iters) == MAXIT) begin
        n_limit++;
        chk(done_seg_ok == 4'b0000, "parity flags at the limit");
      end else n_early++;
    end
  end

  task automatic load(bit badf, int it);
    for (int c = 0; c < 3; c++) begin
      @(negedge clk);
      ld_valid = 1; ld_last = (c == 2); ld_col = 7'(c);
      while (!ld_ready) @(negedge clk);
      if (c == 0) begin bad[ld_slot] = badf; exp_it[ld_slot] = it; end
      @(posedge clk);
    end
    @(negedge clk);
    ld_valid = 0; ld_last = 0;
  endtask

  initial begin
    ld_valid = 0; ld_last = 0; bad = '{0, 0}; cfg_early = 0; ld_col = 0;
    cfg_z = ZBITS'(Z); cfg_par = PAR1; cfg_layers = ($clog2(NLAYER)+1)'(L);
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(0, 0);
    repeat (40) @(posedge clk);
    load(1, MAXIT);
    load(0, 0);
    repeat (150) @(posedge clk);
    load(1, MAXIT);
    load(1, MAXIT);
    repeat (200) @(posedge clk);
    chk(n_done == 5 && n_early == 2 && n_limit == 3, $sformatf("done %0d early %0d limit %0d", n_done, n_early, n_limit));
    chk(n_fresh == 5 && n_both > 0, "fresh periods / two slots");
    chk(!ld_slot || ld_ready, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
