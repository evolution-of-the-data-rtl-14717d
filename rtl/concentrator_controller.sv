// Concentrator controller: slot assignment, network settings, record strobes.
//
// Every clock up to M = 2^N inputs may carry a DAQ word (daq_flag). The words
// are packed into M-slot records without gaps, in input order, after the
// `fill` words still waiting in the aux record: the DAQ word with r DAQ words
// on lower-numbered inputs gets slot (fill + r) mod M. Words whose
// unreduced slot fill + r is below M complete the current record; the others
// wrap into the next one.
//
// Network settings: destination-tag routing on the slot number, bit l of the
// slot deciding at layer l (0 = upper half). A word therefore leaves the
// baseline network at output bitrev(slot), and the fixed bit-reverse wiring
// after the network puts it in its slot. Because DAQ words on consecutive
// inputs have consecutive slots, the two words meeting at a switch always
// differ in the routing bit, and the same holds inside each sub-network, so
// no two words ever ask for the same switch output. A switch is set by its
// upper input if that carries a word, otherwise by its lower input.
//
// Record strobes (all combinational, used by the registers of this clock):
//  - record not complete (fill + count < M, no flush): the new words are
//    written to the aux record (aux_we), fill grows by count;
//  - record complete (fill + count >= M) or flush: out_load. The output
//    record takes slots below `fill` from the aux record, the slots of this
//    clock's completing words from the network and, only on a flush, the
//    filler word in the slots left empty. Wrapping words go to the aux record
//    and their number becomes the new fill. out_end marks a flush.
//
// From the paper: consecutive DAQ words to consecutive outputs modulo 2^N in
// bit-reversed order, non-DAQ words skipped, partial record kept in the aux
// record, the strobe groups of the block diagram. This design's choices: the
// routing rule, the aux/output split and the flush with filler words.
module concentrator_controller
  import sts_conc_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [2**N-1:0]            daq_flag,
  input  logic                       flush,
  output logic [N-1:0][2**(N-1)-1:0] sw_ctrl,
  output logic [2**N-1:0]            aux_we,
  output slot_src_t [2**N-1:0]       out_src,
  output logic                       out_load,
  output logic                       out_end,
  output logic [N-1:0]               fill
);

  localparam int unsigned M = 2**N;

  logic [N:0]      count;                // DAQ words in this clock
  logic [N:0]      total;                // fill + count
  logic [M-1:0][N-1:0] slot;             // slot of the word on input i
  logic [M-1:0]    wraps;                // word i belongs to the next record
  logic [M-1:0]    slot_hit;             // a word lands in slot j
  logic [M-1:0]    slot_wrap;            // ... and it wraps
  logic            complete;
  logic [N-1:0]    fill_next;

  // Slot assignment by prefix count.
  always_comb begin
    logic [N:0] run;
    run = '0;
    for (int i = 0; i < M; i++) begin
      logic [N:0] pos;
      pos      = {1'b0, fill} + run;
      slot[i]  = pos[N-1:0];
      wraps[i] = pos[N];
      run      = run + (N+1)'(daq_flag[i]);
    end
    count = run;
    total = {1'b0, fill} + count;
  end

  // Destination-tag routing through the N layers.
  always_comb begin
    logic [M-1:0][N-1:0] tag, tag_n;
    logic [M-1:0]        v, v_n;
    tag = slot;
    v   = daq_flag;
    sw_ctrl = '0;
    for (int l = 0; l < N; l++) begin
      int unsigned S;                    // lines per sub-network in layer l
      S = M >> l;
      tag_n = '0;
      v_n   = '0;
      for (int b = 0; b < (1 << l); b++) begin
        for (int s = 0; s < S / 2; s++) begin
          int unsigned a0, a1, u, d;
          logic c;
          a0 = b * S + 2 * s;
          a1 = a0 + 1;
          u  = b * S + s;
          d  = b * S + S / 2 + s;
          if (v[a0])      c = tag[a0][l];
          else if (v[a1]) c = !tag[a1][l];
          else            c = 1'b0;
          sw_ctrl[l][b * (S / 2) + s] = c;
          tag_n[u] = c ? tag[a1] : tag[a0];
          v_n[u]   = c ? v[a1]   : v[a0];
          tag_n[d] = c ? tag[a0] : tag[a1];
          v_n[d]   = c ? v[a0]   : v[a1];
        end
      end
      tag = tag_n;
      v   = v_n;
    end
  end

  // Which record slots receive a word in this clock.
  always_comb begin
    slot_hit  = '0;
    slot_wrap = '0;
    for (int i = 0; i < M; i++) begin
      if (daq_flag[i]) begin
        slot_hit[slot[i]]  = 1'b1;
        slot_wrap[slot[i]] = wraps[i];
      end
    end
  end

  assign complete = total[N] || flush;
  assign out_load = complete;
  assign out_end  = flush;

  always_comb begin
    for (int j = 0; j < M; j++) begin
      if (!complete) begin
        aux_we[j]  = slot_hit[j];
        out_src[j] = SRC_AUX;
      end else begin
        aux_we[j] = slot_hit[j] && slot_wrap[j];
        if (N'(j) < fill)                       out_src[j] = SRC_AUX;
        else if (slot_hit[j] && !slot_wrap[j])  out_src[j] = SRC_NET;
        else                                    out_src[j] = SRC_FILL;
      end
    end
    if (total[N])   fill_next = total[N-1:0];
    else if (flush) fill_next = '0;
    else            fill_next = total[N-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) fill <= '0;
    else        fill <= fill_next;
  end

  // Routing must never let two words share a slot.
  always_comb begin
    if (rst_n) assert ($countones(slot_hit) == count)
      else $error("slot conflict: %0d words, %0d slots", count, $countones(slot_hit));
  end

endmodule
