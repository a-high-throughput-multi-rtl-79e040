// tb_shift_net - checks the reconfigurable cyclic shift network.
//
// Random vectors, lifting sizes, shift values and all three parallelism
// modes: every active output lane must equal the input lane (k + SV) mod Z of
// its own segment, one clock after the input (registered output).
module tb_shift_net;
  import ldpc_pkg::*;
  localparam int N = ZMAX;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  msg_t               din  [N];
  msg_t               dout [N];
  logic [$clog2(N)-1:0] sv;
  logic [$clog2(N):0]   z;
  par_t               par;

  shift_net #(.N(N)) dut (.clk, .din, .sv, .z, .par, .dout);

  int checks = 0, failures = 0;
  int n_mode [3] = '{0, 0, 0};
  int n_partial = 0;

  initial begin
    for (int t = 0; t < 600; t++) begin
      int np, segw, zz, ss;
      msg_t exp_o [N];
      int p;
      p = t % 3;
      par = par_t'(p);
      np   = 1 << p;
      segw = N / np;
      zz   = (t % 5 == 0) ? segw : int'($urandom_range(2, segw));
      ss   = int'($urandom_range(0, zz - 1));
      z    = ($clog2(N)+1)'(zz);
      sv   = ($clog2(N))'(ss);
      for (int i = 0; i < N; i++) din[i] = msg_t'($urandom);
      for (int s = 0; s < np; s++)
        for (int o = 0; o < zz; o++) exp_o[s*segw + o] = din[s*segw + (o + ss) % zz];
      @(posedge clk);
      #1;
      for (int s = 0; s < np; s++)
        for (int o = 0; o < zz; o++) begin
          checks++;
          if (dout[s*segw + o] !== exp_o[s*segw + o]) begin
            failures++;
            if (failures < 10)
              $display("FAIL par=%0d z=%0d sv=%0d lane %0d: %0d vs %0d", p, zz, ss, s*segw+o,
                       dout[s*segw+o], exp_o[s*segw+o]);
          end
        end
      n_mode[p]++;
      if (zz < segw) n_partial++;
    end
    checks++;
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0 || n_partial == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
