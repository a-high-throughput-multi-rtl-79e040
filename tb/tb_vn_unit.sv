// tb_vn_unit - checks the primary variable node over random accumulation
// periods: after the last layer the outgoing entry of each half equals LLR
// plus the C2V messages of the connected layers, saturated after each
// addition in layer order; the outgoing register keeps the previous frame's
// value while the next one accumulates; a disabled lane (en = 0) keeps its
// state.
module tb_vn_unit;
  import ldpc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       en, upd, u_half, first, last, conn, rd_half;
  msg_t       llr, c2v, app_out;
  logic [1:0] hard;

  vn_unit dut (.*);

  int checks = 0, failures = 0, n_sat = 0, n_unconn_first = 0;
  int prev [2];

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

  initial begin
    int acc [2];
    int lv  [2];
    en = 1; upd = 0; u_half = 0; first = 0; last = 0; conn = 0; rd_half = 0; llr = 0; c2v = 0;
    prev = '{0, 0};
    for (int p = 0; p < 60; p++) begin
      int L;
      L = int'($urandom_range(2, 8));
      lv[0] = int'($urandom_range(0, 30)) - 15;
      lv[1] = int'($urandom_range(0, 30)) - 15;
      acc = lv;
      for (int l = 0; l < L; l++)
        for (int h = 0; h < 2; h++) begin
          @(negedge clk);
          upd = 1; u_half = h[0]; first = (l == 0); last = (l == L - 1);
          conn = ($urandom_range(0, 3) != 0);
          if (l == 0 && !conn) n_unconn_first++;
          llr = msg_t'(lv[h]);
          c2v = msg_t'($urandom_range(0, 30) - 15);
          if (conn) begin
            if (sat(acc[h] + int'(c2v)) != acc[h] + int'(c2v)) n_sat++;
            acc[h] = sat(acc[h] + int'(c2v));
          end
          // the outgoing register still holds the previous period
          rd_half = h[0];
          #1;
          if (l < L - 1 && p > 0) chk(int'(app_out) == prev[h], "outgoing register disturbed");
        end
      @(negedge clk);
      upd = 0;
      for (int h = 0; h < 2; h++) begin
        rd_half = h[0];
        #1;
        chk(int'(app_out) == acc[h], $sformatf("period %0d half %0d: %0d vs %0d", p, h, app_out, acc[h]));
        chk(hard[h] == (acc[h] < 0), "hard decision");
      end
      prev = acc;
    end
    // disabled lane keeps its state
    @(negedge clk);
    en = 0; upd = 1; u_half = 0; first = 1; last = 1; conn = 1; llr = 5; c2v = 5;
    @(negedge clk);
    upd = 0; rd_half = 0;
    #1;
    chk(int'(app_out) == prev[0], "disabled lane wrote");
    chk(n_sat > 0 && n_unconn_first > 0, "coverage");
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
