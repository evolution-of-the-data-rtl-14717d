// 2x2 switch of the baseline network: straight (ctrl = 0: in0->out0,
// in1->out1) or crossed (ctrl = 1: in0->out1, in1->out0). Combinational.
// out0 feeds the upper sub-network, out1 the lower one.
module baseline_switch #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] in0,
  input  logic [W-1:0] in1,
  input  logic         ctrl,
  output logic [W-1:0] out0,
  output logic [W-1:0] out1
);
  always_comb begin
    out0 = ctrl ? in1 : in0;
    out1 = ctrl ? in0 : in1;
  end
endmodule
