// Artificial epoch-marker inserter for one e-link.
//
// A front-end e-link that sends nothing for a long time also sends no epoch
// (TS-MSB) markers, so software would lose track of the upper timestamp bits
// for that link. This block counts idle clocks on one e-link; after TIMEOUT
// idle clocks it emits one artificial TS-MSB marker built from bits 13..8 of
// the local timestamp and restarts the count. A real word always passes
// unchanged and restarts the count too, so markers appear only on a silent
// link and never collide with data.
//
// Interface: in_valid/in_data from the e-link receiver, ts_msb from the local
// TS counter; out_valid/out_data towards the group serializer, registered
// (one clock of latency). `inserted` flags a marker cycle.
//
// From the paper: the need for artificial epoch markers on a silent e-link and
// the marker contents (bits 13..8, triplicated, 4-bit CRC). This design's
// choices: the timeout (256 clocks = 1.6 us at 160 MHz), the header bits and
// the CRC polynomial (see sts_conc_pkg).
module epoch_inserter
  import sts_conc_pkg::*;
#(
  parameter int unsigned TIMEOUT = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  elink_data_t in_data,
  input  logic [5:0]  ts_msb,
  output logic        out_valid,
  output elink_data_t out_data,
  output logic        inserted
);

  localparam int CW = $clog2(TIMEOUT + 1);
  logic [CW-1:0] idle;
  logic          fire;

  assign fire = !in_valid && (idle == CW'(TIMEOUT - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idle      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      inserted  <= 1'b0;
    end else begin
      out_valid <= in_valid || fire;
      inserted  <= fire;
      if (in_valid)  out_data <= in_data;
      else if (fire) out_data <= make_epoch_marker(ts_msb);
      idle <= (in_valid || fire) ? '0 : idle + 1'b1;
    end
  end

endmodule
