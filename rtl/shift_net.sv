// shift_net - reconfigurable cyclic shift network (Banyan variant).
//
// Rotates the Z active lanes of an N-lane message vector by a shift value SV:
// out[k] = in[(k + SV) mod Z] for k < Z. A plain log-stage network can only
// rotate over all N lanes, so, as in the Banyan variant the decoder is built
// on, two copies of the network run side by side: the original rotates by SV
// over N lanes, which is right for output lanes k < Z - SV, and the duplicate
// rotates by SV + (N - Z), which is right for the remaining lanes. A last
// column of 2:1 multiplexers picks, per output lane, the copy that is right.
//
// Multi-mode: with par = PAR2 (PAR4) the N lanes are split into two (four)
// contiguous segments of N/2 (N/4) lanes that rotate independently, each
// carrying a different frame with the same Z and SV (Z <= N/2 or N/4). The
// segment width replaces N in the rule above. This follows the paper's split
// of the 96x96 network into two 48x48 and four 24x24 networks.
//
// Each copy is ceil(log2 N) stages of 2:1 switches (7 stages for N = 96);
// stage s moves data by 2^s lanes, wrapping inside the segment. The paper's
// figure shows the network as a 96-wide switch column feeding two 48-wide
// halves, each feeding two 24-wide quarters; the switch-by-switch wiring of a
// 96-lane Banyan is not given, so this stage order (a logarithmic barrel
// arrangement with segment-aware wrap) is this design's own.
//
// Timing: the output is registered (the network output is pipelined, as in
// the paper), so out is valid one clock after in/sv/z/par. Lanes at or above
// Z in a segment carry don't-care data.
module shift_net
  import ldpc_pkg::*;
#(
  parameter int unsigned N = ZMAX
) (
  input  logic                   clk,
  input  msg_t                   din  [N],
  input  logic [$clog2(N)-1:0]   sv,    // shift value, 0 <= sv < z
  input  logic [$clog2(N):0]     z,     // active lanes per segment
  input  par_t                   par,
  output msg_t                   dout [N]
);
  localparam int unsigned NST = $clog2(N);

  // Segment width and rotation amounts of both copies.
  logic [$clog2(N):0] segw;
  logic [NST-1:0]     amt0, amt1;
  always_comb begin
    unique case (par)
      PAR2:    segw = ($clog2(N)+1)'(N / 2);
      PAR4:    segw = ($clog2(N)+1)'(N / 4);
      default: segw = ($clog2(N)+1)'(N);
    endcase
    amt0 = sv;
    amt1 = NST'(sv + segw - z);
  end

  // Source lane of lane i when the data move by d lanes inside a segment of
  // width w.
  function automatic int src_lane(int i, int d, int w);
    int base, off;
    base = (i / w) * w;
    off  = (i - base + d) % w;
    return base + off;
  endfunction

  msg_t st0 [NST+1][N];
  msg_t st1 [NST+1][N];

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      st0[0][i] = din[i];
      st1[0][i] = din[i];
    end
    for (int s = 0; s < int'(NST); s++) begin
      for (int i = 0; i < int'(N); i++) begin
        msg_t f0, f1;
        unique case (par)
          PAR2: begin
            f0 = st0[s][src_lane(i, 1 << s, N / 2)];
            f1 = st1[s][src_lane(i, 1 << s, N / 2)];
          end
          PAR4: begin
            f0 = st0[s][src_lane(i, 1 << s, N / 4)];
            f1 = st1[s][src_lane(i, 1 << s, N / 4)];
          end
          default: begin
            f0 = st0[s][src_lane(i, 1 << s, N)];
            f1 = st1[s][src_lane(i, 1 << s, N)];
          end
        endcase
        st0[s+1][i] = amt0[s] ? f0 : st0[s][i];
        st1[s+1][i] = amt1[s] ? f1 : st1[s][i];
      end
    end
  end

  // Output multiplexer column and pipeline register.
  always_ff @(posedge clk) begin
    for (int i = 0; i < int'(N); i++) begin
      logic [$clog2(N):0] off;
      unique case (par)
        PAR2:    off = ($clog2(N)+1)'(i % (N / 2));
        PAR4:    off = ($clog2(N)+1)'(i % (N / 4));
        default: off = ($clog2(N)+1)'(i);
      endcase
      dout[i] <= (off + sv < z) ? st0[NST][i] : st1[NST][i];
    end
  end

endmodule
