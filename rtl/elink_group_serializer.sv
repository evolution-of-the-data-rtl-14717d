// E-link group serializer: up to 15 e-links of one GBT link onto one stream.
//
// Each e-link delivers at most one 24-bit word per 93.75 ns (30 bits at
// 320 Mb/s). At 160 MHz that is one word per 15 clocks, so 15 e-links fit
// one word per clock exactly. A slot counter visits the e-links
// round-robin, one per clock, and emits the oldest held word of the e-link whose slot it is, extended with the source
// ID {GBT-link number, e-link number} to a 32-bit DAQ word. Each e-link has a
// two-word buffer: one word suffices for an e-link at its legal rate, the
// second absorbs an artificial epoch marker that the epoch inserter placed
// just before a real word (two words closer than 15 clocks, once). A word
// arriving at a full buffer is dropped and sets the e-link's sticky overrun
// flag.
//
// Timing: at the legal rate a word is visible on out_word 2..16 clocks after
// elink_valid; a word queued behind a marker waits up to 15 clocks more.
// daq_flag is the DAQ-word flag of the concentrator input (registered).
//
// From the paper: grouping of up to 15 e-links, serialization at 160 MHz and
// the source ID of e-link and GBT-link number forming 32-bit words. This
// design's choices: the round-robin slot scheme, the field layout of the
// source ID and the overrun handling.
module elink_group_serializer
  import sts_conc_pkg::*;
#(
  parameter int unsigned NUM_ELINKS = 15
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [LINK_ID_W-1:0]         link_id,
  input  logic [NUM_ELINKS-1:0]        elink_valid,
  input  elink_data_t [NUM_ELINKS-1:0] elink_data,
  output logic                         daq_flag,
  output daq_word_t                    out_word,
  output logic [NUM_ELINKS-1:0]        overrun
);

  localparam int SW = (NUM_ELINKS > 1) ? $clog2(NUM_ELINKS) : 1;

  // Two-word buffer per e-link: word 0 is the head.
  logic [1:0]  cnt   [NUM_ELINKS];
  elink_data_t hold0 [NUM_ELINKS];
  elink_data_t hold1 [NUM_ELINKS];
  logic [SW-1:0] slot;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      slot     <= '0;
      overrun  <= '0;
      daq_flag <= 1'b0;
      out_word <= '0;
      for (int i = 0; i < NUM_ELINKS; i++) cnt[i] <= '0;
    end else begin
      slot     <= (slot == SW'(NUM_ELINKS - 1)) ? '0 : slot + 1'b1;
      daq_flag <= (cnt[slot] != 2'd0);
      out_word <= '{link: link_id, elink: ELINK_ID_W'(slot), data: hold0[slot]};
      for (int i = 0; i < NUM_ELINKS; i++) begin
        automatic logic pop  = (SW'(i) == slot) && (cnt[i] != 2'd0);
        automatic logic push = elink_valid[i];
        unique case ({pop, push})
          2'b11: begin
            if (cnt[i] == 2'd1) hold0[i] <= elink_data[i];
            else begin
              hold0[i] <= hold1[i];
              hold1[i] <= elink_data[i];
            end
          end
          2'b10: begin
            hold0[i] <= hold1[i];
            cnt[i]   <= cnt[i] - 1'b1;
          end
          2'b01: begin
            if (cnt[i] == 2'd0) begin
              hold0[i] <= elink_data[i];
              cnt[i]   <= 2'd1;
            end else if (cnt[i] == 2'd1) begin
              hold1[i] <= elink_data[i];
              cnt[i]   <= 2'd2;
            end else overrun[i] <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  initial assert (NUM_ELINKS <= 15)
    else $error("at most 15 e-links per group: e-link number 15 marks filler words");

endmodule
