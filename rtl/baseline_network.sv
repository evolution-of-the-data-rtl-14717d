// N-layer baseline interconnection network, 2^N inputs and outputs.
//
// The network is defined recursively, as in the concentrator block diagram:
// a first layer of 2^(N-1) 2x2 switches, where switch s takes inputs 2s and
// 2s+1 and sends out0 to input s of an upper (N-1)-layer network and out1 to
// input s of a lower one; the upper network drives outputs 0..2^(N-1)-1, the
// lower the rest; a 1-layer network is a single switch. This module builds
// the same network with the recursion unrolled into N layers of lines:
// in layer l the lines form 2^l sub-networks of S = 2^(N-l) lines; switch s
// of sub-network b joins lines b*S+2s and b*S+2s+1 and drives lines b*S+s
// (upper half) and b*S+S/2+s (lower half) of the next layer.
//
// ctrl[l][j] sets switch j of layer l (0 straight, 1 crossed), counted
// through the sub-networks in order: j = b*S/2 + s. Purely combinational;
// the concentrator controller computes the settings.
//
// From the paper: the recursive baseline structure and N = 4. This design's
// choices: switch and control-bit conventions, no pipeline registers.
module baseline_network #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 32
) (
  input  logic [2**N-1:0][W-1:0]     din,
  input  logic [N-1:0][2**(N-1)-1:0] ctrl,
  output logic [2**N-1:0][W-1:0]     dout
);

  localparam int unsigned M = 2**N;

  logic [N:0][M-1:0][W-1:0] line;   // line[l] feeds layer l

  assign line[0] = din;

  for (genvar l = 0; l < N; l++) begin : g_layer
    localparam int unsigned S = M >> l;
    for (genvar b = 0; b < (1 << l); b++) begin : g_sub
      for (genvar s = 0; s < S / 2; s++) begin : g_sw
        baseline_switch #(.W(W)) u_sw (
          .in0 (line[l][b*S + 2*s]),
          .in1 (line[l][b*S + 2*s + 1]),
          .ctrl(ctrl[l][b*(S/2) + s]),
          .out0(line[l+1][b*S + s]),
          .out1(line[l+1][b*S + S/2 + s])
        );
      end
    end
  end

  assign dout = line[N];

endmodule
