// Local timestamp counter.
//
// Keeps the local time in units of 3.125 ns, the front-end timestamp unit,
// and advances by STEP per clock (2 at 160 MHz). The Timing and Fast Control
// system keeps it in step: tfc_sync loads tfc_ts, which then appears on ts in
// the next clock. The paper names the counter and its TFC input; the load
// interface and the counting unit are this design's choices.
module local_ts_counter #(
  parameter int unsigned TS_W = 64,
  parameter int unsigned STEP = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            tfc_sync,
  input  logic [TS_W-1:0] tfc_ts,
  output logic [TS_W-1:0] ts
);
  always_ff @(posedge clk) begin
    if (!rst_n)        ts <= '0;
    else if (tfc_sync) ts <= tfc_ts;
    else               ts <= ts + TS_W'(STEP);
  end
endmodule
