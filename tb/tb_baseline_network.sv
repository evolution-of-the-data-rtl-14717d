// Testbench: baseline_network (N = 4, 16 x 32 bits).
// The reference model follows the recursive definition: a layer of 2x2
// switches, then an upper and a lower network of one layer less. Random data
// and random switch settings are compared with it; every setting must also
// give a permutation of the inputs.
module tb_baseline_network;
  localparam int N = 4;
  localparam int M = 2**N;
  localparam int W = 32;

  logic [M-1:0][W-1:0]   din, dout;
  logic [N-1:0][M/2-1:0] ctrl;
  int checks = 0, failures = 0;

  baseline_network #(.N(N), .W(W)) dut (.din, .ctrl, .dout);

  // Recursive reference: first layer of switches, then the upper and lower
  // (n-1)-layer networks on lines [0, h) and [h, 2h). c[l] holds the settings
  // of layer l of this sub-network (h/... switches starting at column `col`).
  function automatic void model_rec(ref logic [W-1:0] d[], input int n,
                                    input logic [N-1:0][M/2-1:0] c,
                                    input int layer, input int col);
    logic [W-1:0] up[], lo[];
    int h;
    if (n == 0) return;
    h = d.size() / 2;
    up = new[h];
    lo = new[h];
    for (int s = 0; s < h; s++) begin
      logic x;
      x = c[layer][col + s];
      up[s] = x ? d[2*s+1] : d[2*s];
      lo[s] = x ? d[2*s]   : d[2*s+1];
    end
    model_rec(up, n - 1, c, layer + 1, col);
    model_rec(lo, n - 1, c, layer + 1, col + h / 2);
    for (int s = 0; s < h; s++) begin
      d[s]     = up[s];
      d[h + s] = lo[s];
    end
  endfunction

  function automatic logic [M-1:0][W-1:0] model(input logic [M-1:0][W-1:0] din_v,
                                                 input logic [N-1:0][M/2-1:0] c);
    logic [W-1:0] d[];
    logic [M-1:0][W-1:0] r;
    d = new[M];
    for (int i = 0; i < M; i++) d[i] = din_v[i];
    model_rec(d, N, c, 0, 0);
    for (int i = 0; i < M; i++) r[i] = d[i];
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [M-1:0][W-1:0] exp_out;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < M; i++) din[i] = (t < 100) ? W'(i) : $urandom;
      for (int l = 0; l < N; l++) ctrl[l] = (M/2)'($urandom);
      if (t == 0) ctrl = '0;
      if (t == 1) ctrl = '1;
      #1;
      exp_out = model(din, ctrl);
      checks++;
      if (dout !== exp_out) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d ctrl=%h", t, ctrl);
      end
      if (t < 100) begin : perm
        logic [M-1:0] seen;
        seen = '0;
        for (int i = 0; i < M; i++) seen[dout[i][N-1:0]] = 1'b1;
        checks++;
        if (seen != '1) failures++;
      end
    end
    // All straight: the identity permutation with the outputs of the upper
    // half being the even inputs (perfect unshuffle at every layer).
    ctrl = '0;
    for (int i = 0; i < M; i++) din[i] = W'(i);
    #1;
    checks++;
    if (dout[0] != 0 || dout[1] != 8 || dout[M-1] != M-1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
