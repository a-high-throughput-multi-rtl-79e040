// ldpc_decoder - multi-mode flooding LDPC decoder for 5G NR base graph 1.
//
// A partially parallel offset min-sum decoder for lifting sizes Z <= 96. The
// 26 mother-code columns are served by 13 groups of 96 variable nodes (each
// VN owns two columns, one per half layer), the 96 check nodes process one
// layer of the lifted graph in two clocks, and 96 extended VNs serve the 42
// degree-1 extension columns. Each VN group talks to the check nodes through
// two cyclic shift networks, one per direction (26 in all); the EVNs connect
// lane to lane because their shifts are all zero. A control unit walks the
// layers, reads the shift ROM and runs two frames at once (one collecting
// VN -> CN messages, the other returning CN -> VN messages).
//
// Multi-mode: with cfg_par = PAR2 (Z <= 48) or PAR4 (Z <= 24) the 96 lanes
// become two or four independent decoders. Frame f of a slot then occupies
// lanes f*96/P .. f*96/P + Z - 1 of every column, so up to 4 x 2 = 8 frames
// are in flight. With PAR1 and Z < 96 the unused lanes are simply disabled.
//
// Interface:
//   cfg_z, cfg_par, cfg_layers  lifting size, parallelism, number of layers
//                               (4 = rate 11/12 ... 46 = rate 1/3); change
//                               only while no frame is in the decoder.
//   cfg_early                   start decoding once the mother code (columns
//                               0..25) is loaded; the extended columns must
//                               then follow in order, one per clock.
//   ld_*                        load one slot, one base-graph column (96
//                               LLRs, 5-bit, positive = bit 0) per accepted
//                               clock, columns 0 .. 21 + cfg_layers, in any
//                               order (ascending with cfg_early); ld_last on
//                               the final column.
//   dec_*                       one pulse per finished slot: hard decisions
//                               of the 26 mother-code columns, iterations
//                               run, and per frame whether all checks passed.
// Latency: a loaded slot starts at its next stage-2 period; one iteration is
// 2 x (2L + 1) clocks; the result leaves 2 x (1 + iterations) periods after
// the start.
module ldpc_decoder
  import ldpc_pkg::*;
#(
  parameter int unsigned MAXIT = MAX_ITER
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [ZBITS-1:0]        cfg_z,
  input  par_t                    cfg_par,
  input  logic [$clog2(NLAYER):0] cfg_layers,
  input  logic                    cfg_early,
  input  logic                    ld_valid,
  output logic                    ld_ready,
  output logic                    ld_slot,      // slot being loaded
  input  logic [6:0]              ld_col,
  input  logic                    ld_last,
  input  msg_t                    ld_llr      [ZMAX],
  output logic                    dec_valid,
  output logic                    dec_slot,
  output logic [3:0]              dec_iters,
  output logic [3:0]              dec_seg_ok,
  output logic [ZMAX-1:0]         dec_bits    [NCOL_M],
  output logic                    period_start,
  output logic                    frame_start,  // a loaded slot starts next clock
  output logic                    frame_slot
);
  localparam int unsigned LW = $clog2(NLAYER);

  // ---- control ------------------------------------------------------------
  logic [LW-1:0]           layer;
  logic                    half;
  bg_entry_t               rom_ent [NHALF];
  logic                    s1_iss, s1_slot, s2_iss, s2_slot, s2_fresh;
  logic [NHALF-1:0]        conn, vn_conn;
  logic                    conn_ext;
  logic [ZBITS-1:0]        sv_fwd [NHALF];
  logic [ZBITS-1:0]        sv_bwd [NHALF];
  logic                    evn_wr, evn_rd;
  logic [$clog2(NEXT)-1:0] evn_addr;
  logic                    vn_upd, vn_half, vn_first, vn_last, vn_slot;
  logic [3:0]              seg_ok;
  logic                    capture, done, done_slot;
  logic [3:0]              done_iters, done_seg_ok;

  shift_rom #(.NL(NLAYER)) u_rom (.layer(layer), .half(half), .ent(rom_ent));

  ctrl_unit #(.NL(NLAYER), .MAXIT(MAXIT)) u_ctrl (
    .clk, .rst_n, .cfg_z, .cfg_par, .cfg_layers, .cfg_early,
    .ld_valid, .ld_last, .ld_col, .ld_ready, .ld_slot,
    .layer, .half, .rom_ent,
    .s1_iss, .s1_slot, .s2_iss, .s2_slot, .s2_fresh, .conn, .conn_ext,
    .sv_fwd, .sv_bwd, .evn_wr, .evn_rd, .evn_addr,
    .vn_upd, .vn_half, .vn_first, .vn_last, .vn_conn, .vn_slot,
    .seg_ok, .capture, .period_start, .frame_start,
    .done, .done_slot, .done_iters, .done_seg_ok
  );

  // ---- lanes in use ---------------------------------------------------------
  logic [ZMAX-1:0] lane_act;
  always_comb begin
    for (int i = 0; i < int'(ZMAX); i++) begin
      unique case (cfg_par)
        PAR2:    lane_act[i] = (i % (ZMAX / 2)) < int'(cfg_z);
        PAR4:    lane_act[i] = (i % (ZMAX / 4)) < int'(cfg_z);
        default: lane_act[i] = i < int'(cfg_z);
      endcase
    end
  end

  // ---- LLR storage --------------------------------------------------------
  msg_t llr_m [NHALF][ZMAX];
  msg_t llr_e [ZMAX];

  llr_buffer #(.Z(ZMAX)) u_llr (
    .clk,
    .wr_en(ld_valid && ld_ready), .wr_slot(ld_slot), .wr_col(ld_col), .wr_data(ld_llr),
    .rd_slot(vn_slot), .rd_half(vn_half), .rd_m(llr_m),
    .ext_slot(s2_slot), .ext_col(evn_addr), .rd_e(llr_e)
  );

  // ---- variable nodes and shift networks ------------------------------------
  msg_t fwd_in  [NHALF][ZMAX];
  msg_t fwd_out [NHALF][ZMAX];
  msg_t bwd_in  [NHALF][ZMAX];
  msg_t bwd_out [NHALF][ZMAX];
  logic [1:0] hard [NHALF][ZMAX];

  for (genvar g = 0; g < int'(NHALF); g++) begin : g_grp
    for (genvar i = 0; i < int'(ZMAX); i++) begin : g_vn
      vn_unit u_vn (
        .clk, .en(lane_act[i]),
        .upd(vn_upd), .u_half(vn_half), .first(vn_first), .last(vn_last),
        .conn(vn_conn[g]), .llr(llr_m[g][i]), .c2v(bwd_out[g][i]),
        .rd_half(half), .app_out(fwd_in[g][i]), .hard(hard[g][i])
      );
    end
    shift_net #(.N(ZMAX)) u_fwd (
      .clk, .din(fwd_in[g]), .sv(sv_fwd[g]), .z({1'b0, cfg_z}), .par(cfg_par),
      .dout(fwd_out[g])
    );
    shift_net #(.N(ZMAX)) u_bwd (
      .clk, .din(bwd_in[g]), .sv(sv_bwd[g]), .z({1'b0, cfg_z}), .par(cfg_par),
      .dout(bwd_out[g])
    );
  end

  // ---- check nodes and extended variable nodes --------------------------------
  logic [ZMAX-1:0] row_ok, row_ok_vld;
  msg_t            evn_q [ZMAX];

  for (genvar i = 0; i < int'(ZMAX); i++) begin : g_cn
    msg_t app_i [NHALF];
    msg_t c2v_i [NHALF];
    msg_t c2v_e;
    for (genvar g = 0; g < int'(NHALF); g++) begin : g_e
      assign app_i[g]     = fwd_out[g][i];
      assign bwd_in[g][i] = c2v_i[g];
    end

    cn_unit #(.NL(NLAYER)) u_cn (
      .clk, .en(lane_act[i]),
      .s1_iss, .s1_slot, .layer, .half, .conn, .conn_ext,
      .app(app_i), .app_ext(evn_q[i]), .row_ok_vld(row_ok_vld[i]), .row_ok(row_ok[i]),
      .s2_iss, .s2_slot, .s2_fresh, .c2v(c2v_i), .c2v_ext(c2v_e)
    );

    evn_unit #(.DEPTH(NEXT)) u_evn (
      .clk, .en(lane_act[i]),
      .wr_en(evn_wr), .wr_addr(evn_addr), .ext_llr(llr_e[i]), .c2v(c2v_e),
      .rd_en(evn_rd), .rd_addr(evn_addr), .rd_data(evn_q[i])
    );
  end

  // ---- parity result per segment ---------------------------------------------
  always_comb begin
    seg_ok = 4'hF;
    for (int i = 0; i < int'(ZMAX); i++) begin
      logic [1:0] s;
      unique case (cfg_par)
        PAR2:    s = 2'(i / (ZMAX / 2));
        PAR4:    s = 2'(i / (ZMAX / 4));
        default: s = 2'd0;
      endcase
      if (lane_act[i] && row_ok_vld[i] && !row_ok[i]) seg_ok[s] = 1'b0;
    end
  end

  // ---- decoded output -----------------------------------------------------------
  logic [ZMAX-1:0] cap [NCOL_M];
  always_ff @(posedge clk) begin
    if (capture) begin
      for (int g = 0; g < int'(NHALF); g++)
        for (int i = 0; i < int'(ZMAX); i++) begin
          cap[g][i]                 <= hard[g][i][0];
          cap[g + int'(NHALF)][i]   <= hard[g][i][1];
        end
    end
    if (done) begin
      dec_bits   <= cap;
      dec_slot   <= done_slot;
      dec_iters  <= done_iters;
      dec_seg_ok <= done_seg_ok;
    end
  end

  assign frame_slot = done_slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dec_valid <= 1'b0;
    else        dec_valid <= done;
  end

endmodule
