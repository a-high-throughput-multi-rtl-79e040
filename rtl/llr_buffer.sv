// llr_buffer - channel LLR storage for the two frame slots.
//
// Holds the received LLRs of the frame in each of the two decoder slots, one
// word of Zmax LLRs per base-graph column (68 columns). The host writes one
// column per clock. The variable nodes read, for the frame being accumulated,
// the 13 columns of one half layer at once (column g + 13*half for VN group
// g); the extended variable nodes read one extended column (26 + k).
//
// Timing: writes take effect at the clock edge, reads are combinational. The
// host must not rewrite a column of a slot being decoded (with the early
// start of the decoder it may still be writing the slot's later columns).
// The paper shows the LLR and extended-LLR inputs of the VNs and EVNs but not how they are
// stored; this register file, its organisation and its ports are this
// design's own.
module llr_buffer
  import ldpc_pkg::*;
#(
  parameter int unsigned Z = ZMAX
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic                      wr_slot,
  input  logic [$clog2(NCOL)-1:0]   wr_col,
  input  msg_t                      wr_data [Z],
  input  logic                      rd_slot,
  input  logic                      rd_half,
  output msg_t                      rd_m    [NHALF][Z],
  input  logic                      ext_slot,
  input  logic [$clog2(NEXT)-1:0]   ext_col,
  output msg_t                      rd_e    [Z]
);
  msg_t mem [2][NCOL][Z];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot][wr_col] <= wr_data;
  end

  always_comb begin
    for (int g = 0; g < int'(NHALF); g++)
      rd_m[g] = mem[rd_slot][g + (rd_half ? int'(NHALF) : 0)];
    rd_e = mem[ext_slot][int'(ext_col) + int'(NCOL_M)];
  end

endmodule
