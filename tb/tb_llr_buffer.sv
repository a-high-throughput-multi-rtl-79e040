// tb_llr_buffer - checks the channel LLR store: columns written to both slots
// are read back through the 13-column half-layer port and the extended
// column port.
module tb_llr_buffer;
  import ldpc_pkg::*;
  localparam int Z = ZMAX;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       wr_en, wr_slot, rd_slot, rd_half, ext_slot;
  logic [6:0] wr_col;
  logic [5:0] ext_col;
  msg_t       wr_data [Z];
  msg_t       rd_m [NHALF][Z];
  msg_t       rd_e [Z];

  llr_buffer #(.Z(Z)) dut (.*);

  int   checks = 0, failures = 0;
  byte  model [2][NCOL][Z];

  initial begin
    wr_en = 0; wr_slot = 0; wr_col = 0; rd_slot = 0; rd_half = 0; ext_slot = 0; ext_col = 0;
    for (int s = 0; s < 2; s++)
      for (int c = 0; c < int'(NCOL); c++) begin
        @(negedge clk);
        wr_en = 1; wr_slot = s[0]; wr_col = 7'(c);
        for (int k = 0; k < Z; k++) begin
          wr_data[k]  = msg_t'($urandom);
          model[s][c][k] = byte'(wr_data[k]);
        end
      end
    @(negedge clk);
    wr_en = 0;
    for (int s = 0; s < 2; s++) begin
      for (int h = 0; h < 2; h++) begin
        rd_slot = s[0]; rd_half = h[0];
        #1;
        for (int g = 0; g < int'(NHALF); g++)
          for (int k = 0; k < Z; k++) begin
            checks++;
            if (byte'(rd_m[g][k]) != model[s][g + h*int'(NHALF)][k]) failures++;
          end
      end
      for (int e = 0; e < int'(NEXT); e++) begin
        ext_slot = s[0]; ext_col = 6'(e);
        #1;
        for (int k = 0; k < Z; k++) begin
          checks++;
          if (byte'(rd_e[k]) != model[s][int'(NCOL_M) + e][k]) failures++;
        end
      end
    end
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
