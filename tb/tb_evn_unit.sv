// tb_evn_unit - checks the extended variable node: stored value is the
// saturated sum of extended LLR and C2V message, reads are registered, and a
// read and a write of the same address in one clock return the old value.
module tb_evn_unit;
  import ldpc_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       en, wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  msg_t       ext_llr, c2v, rd_data;

  evn_unit dut (.*);

  int   checks = 0, failures = 0, n_sat = 0, n_same = 0;
  int   model [NEXT];

  function automatic int sat(int v);
    return v > 15 ? 15 : (v < -15 ? -15 : v);
  endfunction

  initial begin
    en = 1; wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; ext_llr = 0; c2v = 0;
    // fill
    for (int a = 0; a < int'(NEXT); a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a);
      ext_llr = msg_t'($urandom_range(0, 30) - 15);
      c2v     = msg_t'($urandom_range(0, 30) - 15);
      model[a] = sat(int'(ext_llr) + int'(c2v));
      if (int'(ext_llr) + int'(c2v) != model[a]) n_sat++;
    end
    // random read / write traffic
    for (int t = 0; t < 400; t++) begin
      int ra, expv;
      @(negedge clk);
      ra = int'($urandom_range(0, NEXT - 1));
      rd_en = 1; rd_addr = 6'(ra);
      wr_en = $urandom_range(0, 1);
      wr_addr = (t % 4 == 0) ? 6'(ra) : 6'($urandom_range(0, NEXT - 1));
      if (wr_en && wr_addr == 6'(ra)) n_same++;
      ext_llr = msg_t'($urandom_range(0, 30) - 15);
      c2v     = msg_t'($urandom_range(0, 30) - 15);
      expv = model[ra];
      @(posedge clk);
      if (wr_en) model[wr_addr] = sat(int'(ext_llr) + int'(c2v));
      #1;
      checks++;
      if (int'(rd_data) != expv) begin
        failures++;
        if (failures < 5) $display("FAIL addr %0d: %0d vs %0d", ra, rd_data, expv);
      end
    end
    checks++;
    if (n_sat == 0 || n_same == 0) failures++;
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
