// evn_unit - extended variable node (one lane).
//
// Columns 27..68 of the base graph (the diagonal parity extension used for
// code rates below 11/12) each have a single edge, to check row 4 + k, with
// shift 0. Their VN therefore needs no accumulator and no feedback: the APP
// value is just extended LLR + C2V, formed by one saturating adder and kept
// in a 42-entry memory, one entry per extended column. Zmax of these sit
// beside the Zmax check nodes, lane i to check node i, with no shift network.
//
// The memory is read for one frame and written for the other in the same
// clock (the check node works on two frames at once): a read returns the
// value stored before a write to the same address in that clock.
//
// Timing: a write takes effect at the clock edge; rd_data is registered, one
// clock after rd_en/rd_addr. The adder, the single 42-deep memory and the
// simultaneous read/write follow the paper; port names are this design's.
module evn_unit
  import ldpc_pkg::*;
#(
  parameter int unsigned DEPTH = NEXT
) (
  input  logic                     clk,
  input  logic                     en,        // lane in use
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  msg_t                     ext_llr,
  input  msg_t                     c2v,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output msg_t                     rd_data
);
  msg_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en && rd_en) rd_data <= mem[rd_addr];
    if (en && wr_en) mem[wr_addr] <= sat_add(ext_llr, c2v);
  end

endmodule
