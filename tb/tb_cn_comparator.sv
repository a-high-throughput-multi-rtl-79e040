// tb_cn_comparator - checks the 16-input minimum tree against a sort.
//
// Random magnitudes (with many ties, small range) and saturated inputs: min1
// and min2 must be the two smallest values, and the index must be the one
// carried by the first input holding min1.
module tb_cn_comparator;
  import ldpc_pkg::*;

  mag_t  mag [16];
  eidx_t idx [16];
  mag_t  min1, min2;
  eidx_t min1_idx;

  cn_comparator #(.NIN(16)) dut (.mag, .idx, .min1, .min2, .min1_idx);

  int checks = 0, failures = 0;

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int m1, m2, i1;
      for (int i = 0; i < 16; i++) begin
        mag[i] = (t % 3 == 0) ? mag_t'($urandom_range(0, 3)) : mag_t'($urandom);
        idx[i] = eidx_t'($urandom_range(0, 26));
      end
      m1 = 99; m2 = 99; i1 = -1;
      for (int i = 0; i < 16; i++) begin
        if (int'(mag[i]) < m1) begin m2 = m1; m1 = int'(mag[i]); i1 = i; end
        else if (int'(mag[i]) < m2) m2 = int'(mag[i]);
      end
      #1;
      checks += 3;
      if (int'(min1) != m1) failures++;
      if (int'(min2) != m2) failures++;
      if (min1_idx != idx[i1]) failures++;
      if (failures > 0 && failures < 4) $display("FAIL t=%0d: %0d %0d / %0d %0d", t, min1, min2, m1, m2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
