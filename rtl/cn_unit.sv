// cn_unit - offset min-sum check node with parity check (one lane).
//
// One check node serves one row of every layer of the lifted base graph; Zmax
// of them sit side by side. A layer has up to 27 edges: 26 mother-code
// columns, received as two half layers of 13 in two clocks, plus the single
// extended-parity column (EVN), which this design delivers with the second
// half. The node holds two frames at once in two slots: in the same clock it
// collects messages of the frame in slot s1 (stage 1) and sends messages of
// the frame in slot s2 (stage 2), so the comparator never stalls.
//
// Stage 1 (VN -> CN), per half layer:
//   * the APP values from the VNs give the hard decisions; their XOR over the
//     row is the parity check (row_ok), used for early termination;
//   * the C2V message sent to each edge one iteration earlier is read from
//     the message memory and subtracted: v2c = APP - old C2V (saturating);
//   * |v2c| of connected edges (saturated value 15 for unconnected ones) go
//     to the 16-input comparator. In the first half its two feedback inputs
//     are saturated, in the second half they carry the first half's minima,
//     so after two clocks min1, min2, the index of min1 and the sign product
//     of the layer are stored in the minimum registers of the slot.
// Stage 2 (CN -> VN), per half layer: the stored minimum of the other slot is
// selected per edge (min2 for the min1 edge, min1 otherwise; index
// comparator), reduced by the offset and clipped at 0, negated when the sign
// product times the edge's own v2c sign is negative (2's complement), sent out
// and written back into the message memory. For a frame's first pass
// (s2_fresh) all messages are zero, which loads the VNs with the bare LLRs and
// clears the memory.
//
// Timing: the s1_* controls come with the issue clock c; app/app_ext arrive
// one clock later (behind the registered shift network), when the old
// message, read synchronously in clock c, is ready too. row_ok is valid in
// the clock after a second-half issue. Stage-2 outputs c2v/c2v_ext are
// combinational in the issue clock. The memory, the comparator input count
// and the offset follow the paper; sending the EVN edge with the second half,
// storing the per-edge v2c signs for stage 2 and the slot addressing are this
// design's choices.
module cn_unit
  import ldpc_pkg::*;
#(
  parameter int unsigned NL = NLAYER   // layers held in the memories
) (
  input  logic                  clk,
  input  logic                  en,          // lane in use
  // stage 1: issue (clock c)
  input  logic                  s1_iss,
  input  logic                  s1_slot,
  input  logic [$clog2(NL)-1:0] layer,       // shared by both stages
  input  logic                  half,        // shared by both stages
  input  logic [NHALF-1:0]      conn,        // edges present in this half layer
  input  logic                  conn_ext,    // extended edge present (half 1)
  // stage 1: data (clock c+1)
  input  msg_t                  app     [NHALF],
  input  msg_t                  app_ext,
  output logic                  row_ok_vld,
  output logic                  row_ok,
  // stage 2 (clock c)
  input  logic                  s2_iss,
  input  logic                  s2_slot,
  input  logic                  s2_fresh,
  output msg_t                  c2v     [NHALF],
  output msg_t                  c2v_ext
);
  typedef struct packed {
    mag_t  m1;
    mag_t  m2;
    eidx_t idx;
    logic  sgn;
  } mins_t;

  typedef msg_t   half_msgs_t [NHALF+1];

  // ---- storage ------------------------------------------------------------
  logic [NHALF*Q+Q-1:0] mem    [2][NL][2];  // old C2V messages (13 + EVN)
  mins_t                minreg [2][NL];     // minimum registers
  logic [NHALF:0]       sgnmem [2][NL][2];  // v2c signs per edge

  // ---- stage 1 ------------------------------------------------------------
  logic                  p_vld, p_slot, p_half;
  logic [$clog2(NL)-1:0] p_layer;
  logic [NHALF-1:0]      p_conn;
  logic                  p_conn_ext;
  logic [NHALF*Q+Q-1:0]  old_q;
  mag_t                  fb_m1, fb_m2;
  eidx_t                 fb_idx;
  logic                  fb_par, fb_sgn;

  always_ff @(posedge clk) begin
    p_vld      <= s1_iss & en;
    p_slot     <= s1_slot;
    p_half     <= half;
    p_layer    <= layer;
    p_conn     <= conn;
    p_conn_ext <= conn_ext & half;
    if (s1_iss && en) old_q <= mem[s1_slot][layer][half];
  end

  mag_t        cmag [16];
  eidx_t       cidx [16];
  logic [NHALF:0] v_sgn;
  logic        hd_x, sg_x;
  mag_t        r_m1, r_m2;
  eidx_t       r_idx;

  always_comb begin
    hd_x = 1'b0;
    sg_x = 1'b0;
    for (int k = 0; k <= int'(NHALF); k++) begin
      msg_t a, o, v;
      logic c;
      a = (k < int'(NHALF)) ? app[k] : app_ext;
      c = (k < int'(NHALF)) ? p_conn[k] : p_conn_ext;
      o = msg_t'(old_q[k*Q +: Q]);
      v = sat_sub(a, o);
      v_sgn[k] = c & v[Q-1];
      cmag[k]  = c ? (v[Q-1] ? mag_t'(-v) : mag_t'(v)) : MAG_MAX;
      cidx[k]  = (k < int'(NHALF)) ? eidx_t'(k + (p_half ? NHALF : 0)) : eidx_t'(NCOL_M);
      hd_x     = hd_x ^ (c & a[Q-1]);
      sg_x     = sg_x ^ v_sgn[k];
    end
    cmag[14] = p_half ? fb_m1 : MAG_MAX;
    cidx[14] = fb_idx;
    cmag[15] = p_half ? fb_m2 : MAG_MAX;
    cidx[15] = fb_idx;
  end

  cn_comparator #(.NIN(16)) u_cmp (
    .mag(cmag), .idx(cidx), .min1(r_m1), .min2(r_m2), .min1_idx(r_idx)
  );

  always_ff @(posedge clk) begin
    if (p_vld) begin
      sgnmem[p_slot][p_layer][p_half] <= v_sgn;
      if (!p_half) begin
        fb_m1  <= r_m1;
        fb_m2  <= r_m2;
        fb_idx <= r_idx;
        fb_par <= hd_x;
        fb_sgn <= sg_x;
      end else begin
        minreg[p_slot][p_layer] <= '{m1: r_m1, m2: r_m2, idx: r_idx, sgn: fb_sgn ^ sg_x};
      end
    end
  end

  assign row_ok_vld = p_vld & p_half;
  assign row_ok     = ~(fb_par ^ hd_x);

  // ---- stage 2 ------------------------------------------------------------
  half_msgs_t out_m;
  always_comb begin
    mins_t          r;
    logic [NHALF:0] sg;
    r  = minreg[s2_slot][layer];
    sg = sgnmem[s2_slot][layer][half];
    for (int k = 0; k <= int'(NHALF); k++) begin
      eidx_t e;
      mag_t  m;
      e = (k < int'(NHALF)) ? eidx_t'(k + (half ? NHALF : 0)) : eidx_t'(NCOL_M);
      m = (e == r.idx) ? r.m2 : r.m1;                        // index comparator
      m = (m > mag_t'(OFFSET)) ? m - mag_t'(OFFSET) : '0;    // offset
      out_m[k] = (r.sgn ^ sg[k]) ? -msg_t'({1'b0, m}) : msg_t'({1'b0, m});
      if (s2_fresh) out_m[k] = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (s2_iss && en) begin
      for (int k = 0; k <= int'(NHALF); k++) mem[s2_slot][layer][half][k*Q +: Q] <= out_m[k];
    end
  end

  always_comb begin
    for (int k = 0; k < int'(NHALF); k++) c2v[k] = out_m[k];
    c2v_ext = out_m[NHALF];
  end

endmodule
