// shift_rom - base-graph ROM of the decoder.
//
// For each layer and half layer it returns the 13 base-graph entries that the
// 13 VN groups meet in that clock: whether the circulant exists (valid) and
// its shift coefficient V. Entry g of half h is column g + 13h. The extended
// columns need no entry: column 26 + k always meets layer 4 + k with shift 0.
// The control unit reduces V modulo the lifting size.
//
// The content comes from ldpc_pkg::bg_value() and is fixed when the design is
// elaborated; the read is combinational. The paper names this ROM and its
// place next to the control unit, but not its organisation or content.
module shift_rom
  import ldpc_pkg::*;
#(
  parameter int unsigned NL = NLAYER
) (
  input  logic [$clog2(NL)-1:0] layer,
  input  logic                  half,
  output bg_entry_t             ent [NHALF]
);
  localparam int unsigned EW = $bits(bg_entry_t);
  typedef logic [NL*2*NHALF*EW-1:0] tab_t;

  function automatic tab_t build();
    tab_t t;
    t = tab_t'(0);
    for (int l = 0; l < int'(NL); l++) begin
      for (int h = 0; h < 2; h++) begin
        for (int g = 0; g < int'(NHALF); g++) begin
          int v;
          v = bg_value(l, g + h * int'(NHALF));
          if (v >= 0) t[((l*2+h)*int'(NHALF)+g)*int'(EW) +: EW] = {1'b1, VBITS'(v)};
        end
      end
    end
    return t;
  endfunction

  localparam tab_t ROM = build();

  always_comb begin
    for (int g = 0; g < int'(NHALF); g++)
      ent[g] = bg_entry_t'(ROM[(({layer, half} * NHALF) + g) * EW +: EW]);
  end

endmodule
