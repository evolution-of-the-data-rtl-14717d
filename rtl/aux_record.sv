// Auxiliary record: 2^N words that hold the DAQ words of a record that is not
// yet full until a later clock. Each slot has its own write strobe from the
// concentrator controller; din is already in record (slot) order. A slot is
// only read after it has been written, so the words need no reset.
// Timing: written on the clock edge, visible the next clock.
module aux_record #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 32
) (
  input  logic                   clk,
  input  logic [2**N-1:0]        we,
  input  logic [2**N-1:0][W-1:0] din,
  output logic [2**N-1:0][W-1:0] q
);
  always_ff @(posedge clk) begin
    for (int j = 0; j < 2**N; j++)
      if (we[j]) q[j] <= din[j];
  end
endmodule
