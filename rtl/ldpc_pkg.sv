// ldpc_pkg - constants, types and arithmetic shared by the multi-mode 5G NR
// LDPC decoder.
//
// The decoder works on base graph 1 (BG1): 46 check rows by 68 columns, of
// which the first 26 columns and the first 4 rows form the mother code and
// columns 26..67 form the diagonal parity extension (one edge each, to rows
// 4..45, with shift 0). Messages are 5-bit two's-complement values that
// saturate symmetrically at +/-15, so a magnitude always fits in 4 bits.
//
// The base-graph content (which entries exist and their shift coefficient
// V) is given by bg_value(). The published 3GPP TS 38.212 BG1 table is not
// reproduced here: bg_value() generates a table with the BG1 shape (mother
// code with the dual-diagonal core parity in columns 22..25, extension checks
// over the first 26 columns, diagonal extension with shift 0) from a fixed
// formula. Replacing its body with the standard table changes nothing else.
package ldpc_pkg;

  // ---- sizes of BG1 -------------------------------------------------------
  localparam int unsigned Q        = 5;   // message width (bits)
  localparam int unsigned ZMAX     = 96;  // largest lifting size
  localparam int unsigned NCOL_M   = 26;  // mother-code columns
  localparam int unsigned NHALF    = 13;  // columns per half layer
  localparam int unsigned NLAYER   = 46;  // check rows of BG1
  localparam int unsigned NCORE    = 4;   // rows of the mother code
  localparam int unsigned NEXT     = 42;  // extended parity columns
  localparam int unsigned NCOL     = NCOL_M + NEXT;  // 68
  localparam int unsigned NEDGE    = NCOL_M + 1;     // CN edges per layer (26 + 1 EVN)
  localparam int unsigned MAX_ITER = 10;
  localparam int unsigned OFFSET   = 1;   // 0.5 with one fractional LLR bit
  localparam int unsigned VBITS    = 9;   // shift coefficient V in 0..383
  localparam int unsigned ZBITS    = 7;   // Z, shift values up to 96

  typedef logic signed [Q-1:0] msg_t;
  typedef logic        [Q-2:0] mag_t;
  typedef logic        [4:0]   eidx_t;   // edge index 0..26 inside a layer

  localparam mag_t MAG_MAX = mag_t'((1 << (Q-1)) - 1);  // 15
  localparam msg_t MSG_MAX = msg_t'(MAG_MAX);
  localparam msg_t MSG_MIN = -MSG_MAX;

  // Parallelism: the Zmax-wide datapath as 1, 2 or 4 independent decoders.
  typedef enum logic [1:0] {PAR1 = 2'd0, PAR2 = 2'd1, PAR4 = 2'd2} par_t;

  // One base-graph entry of a half layer, as held by the shift ROM.
  typedef struct packed {
    logic             valid;  // a circulant exists here
    logic [VBITS-1:0] v;      // shift coefficient
  } bg_entry_t;

  // Saturating addition of two messages (result clipped to +/-15).
  function automatic msg_t sat_add(msg_t a, msg_t b);
    logic signed [Q:0] s;
    s = $signed({a[Q-1], a}) + $signed({b[Q-1], b});
    if (s > $signed({1'b0, MSG_MAX})) return MSG_MAX;
    if (s < $signed({1'b1, MSG_MIN})) return MSG_MIN;
    return msg_t'(s);
  endfunction

  function automatic msg_t sat_sub(msg_t a, msg_t b);
    logic signed [Q:0] s;
    s = $signed({a[Q-1], a}) - $signed({b[Q-1], b});
    if (s > $signed({1'b0, MSG_MAX})) return MSG_MAX;
    if (s < $signed({1'b1, MSG_MIN})) return MSG_MIN;
    return msg_t'(s);
  endfunction

  // BG1-shaped base graph. Returns -1 where the entry is empty.
  function automatic int bg_value(int row, int col);
    if (col >= int'(NCOL_M)) begin
      // diagonal parity extension: column 26+k belongs to row 4+k, shift 0
      return (row >= int'(NCORE) && col == row - int'(NCORE) + int'(NCOL_M)) ? 0 : -1;
    end
    if (row < int'(NCORE)) begin
      if (col < 22) begin
        if (((row * 5 + col * 7) % 9) == 0) return -1;
      end else begin
        // dual-diagonal core parity of BG1
        case (col)
          22: if (row == 1) return -1;
          23: if (row > 1) return -1;
          24: if (row == 0 || row == 3) return -1;
          default: if (row < 2) return -1;
        endcase
        if (col > 22) return 0;
      end
    end else begin
      if (((row * 13 + col * 5) % 7) != 0) return -1;
    end
    return ((row + 1) * (col + 3) * 73 + row * row * 29 + col * col * col * 11 + 5) % 384;
  endfunction

endpackage
