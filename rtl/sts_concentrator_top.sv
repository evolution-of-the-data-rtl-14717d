// STS readout data aggregation by simple concentration (one output stream).
//
// 2^N e-link groups, each the e-links of one GBT link (up to 15), are
// concentrated into one stream of 512-bit records for the PCIe output module
// (FLIM), cut into microslices by arrival time. The detector data pass
// unchanged apart from the 8-bit source ID added to every word and the
// artificial epoch markers inserted on e-links that stay silent, so the
// original per-e-link streams can be rebuilt in software.
//
// Per group: NUM_ELINKS epoch inserters -> e-link group serializer (one
// 32-bit DAQ word per clock at most). All groups: data concentrator
// (baseline network, aux and output records) -> output FIFO (records with an
// end-of-microslice flag) -> microslice generator -> out_* stream. The local
// TS counter, loaded from TFC, times the microslices and the epoch markers.
//
// Interface: elink_valid/elink_data are decoded e-link words from the GBT-link
// receivers, synchronous to the 160 MHz clk; link_id gives each group's
// GBT-link number. out_valid/out_ready/out_data/out_desc connect to the
// output module; the stream may be held by out_ready, and records that then
// no longer fit in the output FIFO are dropped and counted in the next
// descriptor. elink_overrun flags e-links that sent faster than allowed.
//
// From the paper: the chain of blocks, N = 4, 15 e-links per group, 32-bit
// words, the packing concentrator and arrival-time microslices. The design's
// own choices are listed in the headers of the sub-modules.
module sts_concentrator_top
  import sts_conc_pkg::*;
#(
  parameter int unsigned N             = 4,
  parameter int unsigned NUM_ELINKS    = 15,
  parameter int unsigned EPOCH_TIMEOUT = 256,
  parameter int unsigned FIFO_DEPTH    = 256,
  parameter int unsigned MS_LOG2       = 15,
  parameter int unsigned TS_W          = 64
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  input  logic                                        tfc_sync,
  input  logic [TS_W-1:0]                             tfc_ts,
  input  logic [2**N-1:0][LINK_ID_W-1:0]              link_id,
  input  logic [2**N-1:0][NUM_ELINKS-1:0]             elink_valid,
  input  elink_data_t [2**N-1:0][NUM_ELINKS-1:0]      elink_data,
  output logic                                        out_valid,
  input  logic                                        out_ready,
  output logic [2**N*WORD_W-1:0]                      out_data,
  output logic                                        out_desc,
  output logic [2**N-1:0][NUM_ELINKS-1:0]             elink_overrun
);

  localparam int unsigned M  = 2**N;
  localparam int unsigned RW = M * WORD_W;

  logic [TS_W-1:0]                ts;
  logic [M-1:0]                   daq_flag;
  daq_word_t [M-1:0]              grp_word;
  logic                           flush;
  logic                           rec_valid, rec_end;
  daq_word_t [M-1:0]              rec;
  logic [RW:0]                    fifo_head;
  logic                           fifo_empty, fifo_rd, fifo_overflow;

  local_ts_counter #(.TS_W(TS_W), .STEP(2)) u_ts (
    .clk, .rst_n, .tfc_sync, .tfc_ts, .ts
  );

  for (genvar g = 0; g < M; g++) begin : g_grp
    logic [NUM_ELINKS-1:0]        ep_valid;
    elink_data_t [NUM_ELINKS-1:0] ep_data;

    for (genvar e = 0; e < NUM_ELINKS; e++) begin : g_el
      epoch_inserter #(.TIMEOUT(EPOCH_TIMEOUT)) u_ep (
        .clk, .rst_n,
        .in_valid(elink_valid[g][e]), .in_data(elink_data[g][e]),
        .ts_msb(ts[13:8]),
        .out_valid(ep_valid[e]), .out_data(ep_data[e]), .inserted()
      );
    end

    elink_group_serializer #(.NUM_ELINKS(NUM_ELINKS)) u_ser (
      .clk, .rst_n, .link_id(link_id[g]),
      .elink_valid(ep_valid), .elink_data(ep_data),
      .daq_flag(daq_flag[g]), .out_word(grp_word[g]),
      .overrun(elink_overrun[g])
    );
  end

  data_concentrator #(.N(N)) u_conc (
    .clk, .rst_n, .daq_flag, .din(grp_word), .flush,
    .rec_valid, .rec_end, .rec
  );

  output_fifo #(.W(RW + 1), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(rec_valid), .wr_data({rec_end, rec}),
    .rd_en(fifo_rd), .rd_data(fifo_head),
    .empty(fifo_empty), .full(), .count(), .overflow(fifo_overflow)
  );

  microslice_generator #(.N(N), .TS_W(TS_W), .MS_LOG2(MS_LOG2)) u_msg (
    .clk, .rst_n, .ts, .flush_req(flush),
    .fifo_empty, .fifo_data(fifo_head), .fifo_rd, .fifo_overflow,
    .out_valid, .out_ready, .out_data, .out_desc
  );

endmodule
