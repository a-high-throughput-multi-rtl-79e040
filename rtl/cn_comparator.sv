// cn_comparator - 16-input first/second minimum finder of the check node.
//
// Finds, among NIN magnitudes, the smallest (min1), the second smallest
// (min2, equal to min1 when the smallest value occurs twice) and the edge
// index carried by the smallest. It is a binary tree: the leaves pair up the
// inputs, and each node merges two (min1, min2, index) triples. On a tie the
// lower input wins, which makes the index deterministic; the offset min-sum
// output does not depend on that choice.
//
// The check node uses it serially: in the first half layer the last two
// inputs carry the saturated value, in the second half layer they carry the
// min1/min2 found in the first half (fed back through registers), so two
// passes cover a whole layer. The tree algorithm and the 16 inputs follow the
// paper; the tie rule and the unregistered (purely combinational) form are
// this design's choices.
module cn_comparator
  import ldpc_pkg::*;
#(
  parameter int unsigned NIN = 16    // must be a power of two
) (
  input  mag_t  mag  [NIN],
  input  eidx_t idx  [NIN],
  output mag_t  min1,
  output mag_t  min2,
  output eidx_t min1_idx
);
  localparam int unsigned LV = $clog2(NIN);

  typedef struct packed {
    mag_t  m1;
    mag_t  m2;
    eidx_t i1;
  } trip_t;

  function automatic trip_t merge(trip_t a, trip_t b);
    trip_t r;
    if (a.m1 <= b.m1) begin
      r.m1 = a.m1;
      r.i1 = a.i1;
      r.m2 = (b.m1 < a.m2) ? b.m1 : a.m2;
    end else begin
      r.m1 = b.m1;
      r.i1 = b.i1;
      r.m2 = (a.m1 < b.m2) ? a.m1 : b.m2;
    end
    return r;
  endfunction

  trip_t lvl [LV+1][NIN];

  always_comb begin
    // leaves: single inputs, second minimum saturated
    for (int i = 0; i < int'(NIN); i++) begin
      lvl[0][i] = '{m1: mag[i], m2: MAG_MAX, i1: idx[i]};
    end
    for (int l = 0; l < int'(LV); l++) begin
      for (int i = 0; i < int'(NIN); i++) begin
        if (i < int'(NIN >> (l + 1))) lvl[l+1][i] = merge(lvl[l][2*i], lvl[l][2*i+1]);
        else                          lvl[l+1][i] = '0;
      end
    end
  end

  assign min1     = lvl[LV][0].m1;
  assign min2     = lvl[LV][0].m2;
  assign min1_idx = lvl[LV][0].i1;

endmodule
