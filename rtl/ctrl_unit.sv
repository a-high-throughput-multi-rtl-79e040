// ctrl_unit - schedule, shift values and frame control of the decoder.
//
// Time is cut into periods of 2L + 1 clocks, L being the number of layers of
// the code rate in use (4 for rate 11/12, up to 46 for rate 1/3). In clocks
// c = 0 .. 2L-1 of a period, layer c/2 and half layer c%2 are issued to both
// check-node stages at once; clock 2L drains the one-clock pipeline. The two
// frame slots alternate: in a period with parity p, slot p is in stage 1
// (VNs -> CNs, parity check and minimum search) and slot !p in stage 2
// (CNs -> VNs, accumulation in the VNs). One decoding iteration of a frame is
// therefore two periods, 4L + 2 clocks (18 clocks at rate 11/12), and two
// frames share those clocks.
//
// Frame life: the host loads a free slot (ld_*), which then waits (READY)
// until its next stage-2 period. With cfg_early the slot is READY as soon as
// column 25, the end of the mother code, is in; the host must then send the
// extended columns 26, 27, ... in order and without gaps, which keeps each
// one ahead of its first use (column 26 + k is read in clock 9 + 2k of the
// first period). The frame starts where it starts with all C2V messages zero
// (fresh), so the VNs take the bare LLRs. Every later stage-1 period checks
// all parity rows of every active segment; the frame ends when all pass
// (early termination) or after MAXIT iterations, and done/done_slot pulse at
// the end of that period.
//
// Per clock it reads the shift ROM for (layer, half), reduces each shift
// coefficient V modulo Z (sv_fwd, for VN -> CN) and forms its complement
// (sv_bwd = (Z - sv) mod Z, for CN -> VN), and marks which columns have an
// edge. Signals for the VNs and the CN data path are delayed one clock
// (vn_*), matching the registered shift network. Z, parallelism and L
// (cfg_*) must stay constant while a frame is in the decoder.
//
// The schedule (half layers, two frames in flight, 18 clocks per iteration at
// rate 11/12), the shift ROM / Z / parallelism inputs and the early
// termination follow the paper; the slot handshake, the period with one drain
// clock and the V mod Z rule of TS 38.212 are this design's choices.
module ctrl_unit
  import ldpc_pkg::*;
#(
  parameter int unsigned NL    = NLAYER,
  parameter int unsigned MAXIT = MAX_ITER
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic [ZBITS-1:0]      cfg_z,
  input  par_t                  cfg_par,
  input  logic [$clog2(NL):0]   cfg_layers,
  input  logic                  cfg_early,   // start once the mother code is in
  // frame loading
  input  logic                  ld_valid,
  input  logic                  ld_last,
  input  logic [6:0]            ld_col,
  output logic                  ld_ready,
  output logic                  ld_slot,
  // shift ROM
  output logic [$clog2(NL)-1:0] layer,
  output logic                  half,
  input  bg_entry_t             rom_ent  [NHALF],
  // issue (clock c)
  output logic                  s1_iss,
  output logic                  s1_slot,
  output logic                  s2_iss,
  output logic                  s2_slot,
  output logic                  s2_fresh,
  output logic [NHALF-1:0]      conn,
  output logic                  conn_ext,
  output logic [ZBITS-1:0]      sv_fwd   [NHALF],
  output logic [ZBITS-1:0]      sv_bwd   [NHALF],
  output logic                  evn_wr,
  output logic                  evn_rd,
  output logic [$clog2(NEXT)-1:0] evn_addr,
  // VN side (clock c+1)
  output logic                  vn_upd,
  output logic                  vn_half,
  output logic                  vn_first,
  output logic                  vn_last,
  output logic [NHALF-1:0]      vn_conn,
  output logic                  vn_slot,
  // parity results and frame completion
  input  logic [3:0]            seg_ok,     // all rows of the segment pass (clock c+1)
  output logic                  capture,    // sample VN hard decisions of slot s1
  output logic                  period_start,
  output logic                  frame_start,
  output logic                  done,
  output logic                  done_slot,
  output logic [3:0]            done_iters,
  output logic [3:0]            done_seg_ok
);
  typedef enum logic [1:0] {FREE, READY, ACTIVE} slot_st_t;

  slot_st_t                st    [2];
  logic [3:0]              iter  [2];
  logic                    fresh [2];
  logic                    ph;
  logic [$clog2(NL)+1:0]   c;
  logic                    ld_busy, ld_tgt, ld_started;
  logic [3:0]              ok_acc;
  logic                    s1_iss_d;

  logic                    iss, last_c;
  assign iss    = (c < {cfg_layers, 1'b0});
  assign last_c = (c >= {cfg_layers, 1'b0});
  assign layer  = ($clog2(NL))'(c >> 1);
  assign half   = c[0];

  assign s1_slot  = ph;
  assign s2_slot  = ~ph;
  assign s1_iss   = iss && st[ph] == ACTIVE;
  assign s2_iss   = iss && st[~ph] == ACTIVE;
  assign s2_fresh = fresh[~ph];
  assign period_start = (c == 0);
  assign capture  = (c == 0) && st[ph] == ACTIVE;

  // extended column of this layer
  assign conn_ext = half && (layer >= ($clog2(NL))'(NCORE));
  assign evn_addr = ($clog2(NEXT))'(layer - ($clog2(NL))'(NCORE));
  assign evn_wr   = s2_iss && conn_ext;
  assign evn_rd   = s1_iss && conn_ext;

  // shift values from the ROM
  always_comb begin
    for (int g = 0; g < int'(NHALF); g++) begin
      logic [ZBITS-1:0] s;
      s         = ZBITS'(rom_ent[g].v % VBITS'(cfg_z));
      conn[g]   = rom_ent[g].valid;
      sv_fwd[g] = s;
      sv_bwd[g] = (s == '0) ? '0 : cfg_z - s;
    end
  end

  // loading
  assign ld_slot  = ld_busy ? ld_tgt : (st[0] == FREE ? 1'b0 : 1'b1);
  assign ld_ready = ld_busy || st[0] == FREE || st[1] == FREE;

  // early-termination decision at the end of a period
  logic [3:0] seg_final, seg_mask;
  logic       all_ok;
  always_comb begin
    unique case (cfg_par)
      PAR2:    seg_mask = 4'b0011;
      PAR4:    seg_mask = 4'b1111;
      default: seg_mask = 4'b0001;
    endcase
    seg_final = ok_acc & (s1_iss_d && half == 1'b0 ? seg_ok : 4'hF);
    all_ok    = &(seg_final | ~seg_mask);
  end

  assign done        = last_c && st[ph] == ACTIVE && (all_ok || iter[ph] == 4'(MAXIT));
  assign done_slot   = ph;
  assign done_iters  = iter[ph];
  assign done_seg_ok = seg_final & seg_mask;
  assign frame_start = last_c && st[ph] == READY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= '{FREE, FREE};
      iter     <= '{4'd0, 4'd0};
      fresh    <= '{1'b0, 1'b0};
      ph       <= 1'b0;
      c        <= '0;
      ld_busy  <= 1'b0;
      ld_tgt   <= 1'b0;
      ld_started <= 1'b0;
      ok_acc   <= '1;
      s1_iss_d <= 1'b0;
      vn_upd   <= 1'b0;
    end else begin
      s1_iss_d <= s1_iss;
      vn_upd   <= s2_iss;
      // accumulate the row checks of stage 1 (second half of each layer)
      if (last_c) ok_acc <= '1;
      else if (s1_iss_d && !half) ok_acc <= ok_acc & seg_ok;

      if (ld_valid && ld_ready) begin
        ld_busy <= !ld_last;
        ld_tgt  <= ld_slot;
        // the slot may start once its last column, or with cfg_early its
        // last mother-code column, is in
        if (ld_last) ld_started <= 1'b0;
        else if (cfg_early && ld_col == 7'(NCOL_M - 1)) ld_started <= 1'b1;
        if ((ld_last || (cfg_early && ld_col == 7'(NCOL_M - 1))) && !ld_started)
          st[ld_slot] <= READY;
      end

      if (last_c) begin
        c  <= '0;
        ph <= ~ph;
        // slot leaving stage 1
        if (st[ph] == ACTIVE) begin
          if (done) st[ph] <= FREE;
          else begin
            iter[ph]  <= iter[ph] + 4'd1;
            fresh[ph] <= 1'b0;
          end
        end else if (st[ph] == READY) begin
          st[ph]    <= ACTIVE;
          iter[ph]  <= '0;
          fresh[ph] <= 1'b1;
        end
        // slot leaving stage 2
        if (st[~ph] == ACTIVE) fresh[~ph] <= 1'b0;
      end else begin
        c <= c + 1'b1;
      end
    end
  end

  // VN-side controls, one clock behind the issue
  always_ff @(posedge clk) begin
    vn_half  <= half;
    vn_first <= (layer == '0);
    vn_last  <= (layer == ($clog2(NL))'(cfg_layers - 1'b1));
    vn_conn  <= conn;
    vn_slot  <= s2_slot;
  end

endmodule
