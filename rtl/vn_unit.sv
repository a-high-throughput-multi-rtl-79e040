// vn_unit - primary variable node (one lane of one column group).
//
// 13 x Zmax of these serve the 26 mother-code columns: each node owns two
// columns, j (first half layer) and j + 13 (second half layer), so its
// registers hold two entries each. Under the flooding schedule the node
// accumulates, layer by layer, the channel LLR and every C2V message of its
// column into the incoming-frame register: at the first layer the input
// selector takes the LLR, later layers take the register's own value back
// (feedback loop), and the saturating adder adds the new message. At the last
// layer the sum, the column's APP value, goes to the outgoing-frame register
// instead. The outgoing register is what the check nodes read during the
// next period, while the incoming register already collects the other frame.
//
// In a layer where the column has no edge the node is disabled: nothing is
// written (except at the first layer, which loads the LLR, and at the last
// layer, which still forwards the sum).
//
// Timing: upd/u_* and llr/c2v belong to the same clock (one clock after the
// controller's issue, behind the registered shift network); the result is
// in the register at the next edge. app_out is the outgoing entry rd_half,
// combinational. The two-register structure, input selector, feedback and
// "last layer" multiplexer follow the paper's figure; the write-enable rule
// for unconnected layers is this design's reading of the text.
module vn_unit
  import ldpc_pkg::*;
(
  input  logic       clk,
  input  logic       en,        // lane in use
  // accumulation (stage 2)
  input  logic       upd,
  input  logic       u_half,
  input  logic       first,     // first layer of the period
  input  logic       last,      // last layer of the period
  input  logic       conn,      // column has an edge in this layer
  input  msg_t       llr,
  input  msg_t       c2v,
  // read-out (stage 1)
  input  logic       rd_half,
  output msg_t       app_out,
  output logic [1:0] hard       // hard decisions of both outgoing entries
);
  msg_t in_reg  [2];
  msg_t out_reg [2];

  msg_t sel, sum;
  always_comb begin
    sel = first ? llr : in_reg[u_half];           // input selector
    sum = sat_add(sel, conn ? c2v : msg_t'(0));   // saturating adder
  end

  always_ff @(posedge clk) begin
    if (upd && en) begin
      if (last)               out_reg[u_half] <= sum;
      else if (conn || first) in_reg[u_half]  <= sum;
    end
  end

  assign app_out = out_reg[rd_half];
  assign hard    = {out_reg[1][Q-1], out_reg[0][Q-1]};

endmodule
