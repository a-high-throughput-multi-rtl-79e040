// tb_shift_rom - checks every entry of the base-graph ROM against the table
// definition and the BG1 shape (mother-code rows with edges in columns
// 22..25, extension rows with edges only in the first 26 columns).
module tb_shift_rom;
  import ldpc_pkg::*;

  logic [$clog2(NLAYER)-1:0] layer;
  logic                      half;
  bg_entry_t                 ent [NHALF];

  shift_rom dut (.layer, .half, .ent);

  int checks = 0, failures = 0;

  initial begin
    for (int l = 0; l < int'(NLAYER); l++)
      for (int h = 0; h < 2; h++) begin
        int deg;
        layer = ($clog2(NLAYER))'(l);
        half  = h[0];
        #1;
        deg = 0;
        for (int g = 0; g < int'(NHALF); g++) begin
          int v;
          v = bg_value(l, g + h * int'(NHALF));
          checks++;
          if (ent[g].valid != (v >= 0) || (v >= 0 && int'(ent[g].v) != v)) begin
            failures++;
            $display("FAIL layer %0d half %0d col %0d", l, h, g);
          end
          if (ent[g].valid) deg++;
        end
        checks++;
        if (deg == 0 && l < int'(NCORE)) failures++;
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
