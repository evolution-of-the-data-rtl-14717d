// High-speed data concentrator with a baseline interconnection network.
//
// Packs the DAQ words offered by M = 2^N inputs per clock into M-word
// records (M x 32 = 512 bits for N = 4) with no empty slots and without ever
// stalling: any pattern of DAQ-word flags, up to M words per clock, is taken
// every clock. Words keep their order: by clock of arrival, and within a
// clock by input number. Record slot 0 is in the low bits of `rec`.
//
// Datapath: inputs -> N-layer baseline network (settings from the
// controller) -> fixed bit-reverse ordering -> aux record and output record.
// Word i that the controller gives slot k leaves network output bitrev(k);
// the bit-reverse wiring brings it to slot k. Words of a record that is not
// yet full wait in the aux record; when a clock completes the record, the
// output record is loaded from both and the output strobe follows.
//
// flush closes the current record in that clock even if it is not full,
// pads it with filler words and marks it with rec_end (microslice boundary).
//
// Timing: a word offered in clock t is in a record loaded at the end of
// clock t or later; rec_valid is high in the clock after the load.
//
// From the paper: the block structure (network, bit-reverse ordering, aux and
// output records, controller) and the packing property. This design's
// choices: controller algorithm, single-clock datapath, flush and filler.
module data_concentrator
  import sts_conc_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [2**N-1:0]             daq_flag,
  input  daq_word_t [2**N-1:0]        din,
  input  logic                        flush,
  output logic                        rec_valid,
  output logic                        rec_end,
  output daq_word_t [2**N-1:0]        rec
);

  localparam int unsigned M = 2**N;

  logic [N-1:0][M/2-1:0]       sw_ctrl;
  logic [M-1:0]                aux_we;
  slot_src_t [M-1:0]           out_src;
  logic                        out_load, out_end;
  logic [N-1:0]                fill;
  logic [M-1:0][WORD_W-1:0]    net_out, slot_data, aux_q, rec_bits;

  concentrator_controller #(.N(N)) u_ctrl (
    .clk, .rst_n, .daq_flag, .flush,
    .sw_ctrl, .aux_we, .out_src, .out_load, .out_end, .fill
  );

  baseline_network #(.N(N), .W(WORD_W)) u_net (
    .din(din), .ctrl(sw_ctrl), .dout(net_out)
  );

  // Bit-reverse ordering: network output bitrev(k) is record slot k.
  for (genvar k = 0; k < M; k++) begin : g_brev
    assign slot_data[k] = net_out[bitrev(k, N)];
  end

  aux_record #(.N(N), .W(WORD_W)) u_aux (
    .clk, .we(aux_we), .din(slot_data), .q(aux_q)
  );

  output_record #(.N(N), .W(WORD_W)) u_out (
    .clk, .rst_n, .load(out_load), .end_in(out_end), .src(out_src),
    .net(slot_data), .aux(aux_q),
    .rec_valid, .rec_end, .rec(rec_bits)
  );

  assign rec = rec_bits;

endmodule
