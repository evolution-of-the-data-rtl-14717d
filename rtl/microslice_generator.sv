// Microslice generator.
//
// Microslice boundaries follow the arrival time of the data, not the
// timestamps inside it: microslice number n covers local times
// [n * 2^MS_LOG2, (n+1) * 2^MS_LOG2) in 3.125 ns units (102.4 us by default).
//
// Write side: when the microslice number of the local time changes, the
// generator pulses flush_req; the concentrator closes its current record,
// marks it as the last of the microslice and writes it to the output FIFO.
// The number of the closed microslice is queued in a small index FIFO.
//
// Read side: records are forwarded from the output FIFO to the output module
// over a valid/ready stream (out_desc = 0). After the record that carries the
// end flag, one descriptor word follows (out_desc = 1), laid out from the low
// bits: microslice number (64), data records (32), DAQ words, i.e. slots not
// holding a filler word (32), records dropped by the output FIFO (32), and
// the constant 32'h4D53_4C43; the rest is zero. The counters restart after
// each descriptor.
//
// From the paper: microslices bounded by data arrival time, local TS counter
// as time source, position after the output FIFO. This design's choices:
// microslice length, the flush request, the end flag and the descriptor.
module microslice_generator
  import sts_conc_pkg::*;
#(
  parameter int unsigned N       = 4,
  parameter int unsigned TS_W    = 64,
  parameter int unsigned MS_LOG2 = 15
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [TS_W-1:0]              ts,
  output logic                         flush_req,
  input  logic                         fifo_empty,
  input  logic [2**N*WORD_W:0]         fifo_data,
  output logic                         fifo_rd,
  input  logic                         fifo_overflow,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [2**N*WORD_W-1:0]       out_data,
  output logic                         out_desc
);

  localparam int unsigned M   = 2**N;
  localparam int unsigned RW  = M * WORD_W;
  localparam logic [31:0] DESC_MAGIC = 32'h4D53_4C43;

  // ---------------- write side: boundaries by arrival time ----------------
  logic [TS_W-1:0] ms_now, ms_prev;
  logic            started;
  logic [TS_W-1:0] idx_head;
  logic            idx_empty, idx_pop;

  assign ms_now = ts >> MS_LOG2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ms_prev   <= '0;
      started   <= 1'b0;
      flush_req <= 1'b0;
    end else begin
      ms_prev   <= ms_now;
      started   <= 1'b1;
      flush_req <= started && (ms_now != ms_prev);
    end
  end

  // The index of a closed microslice waits here until its last record is read.
  output_fifo #(.W(TS_W), .DEPTH(4)) u_idx (
    .clk, .rst_n,
    .wr_en(started && (ms_now != ms_prev)), .wr_data(ms_prev),
    .rd_en(idx_pop), .rd_data(idx_head),
    .empty(idx_empty), .full(), .count(), .overflow()
  );

  // ---------------- read side: records, then a descriptor -----------------
  typedef enum logic { S_DATA, S_DESC } state_t;
  state_t       state;
  logic [31:0]  n_rec, n_words, n_drop;
  logic         head_end;
  logic [RW-1:0] head_rec;
  logic [N:0]   head_words;

  assign head_end = fifo_data[RW];
  assign head_rec = fifo_data[RW-1:0];

  always_comb begin
    head_words = '0;
    for (int j = 0; j < M; j++)
      if (head_rec[j*WORD_W + DATA_W +: ELINK_ID_W] != FILLER_ELINK) head_words++;
  end

  assign fifo_rd   = (state == S_DATA) && !fifo_empty && out_ready;
  assign out_valid = (state == S_DESC) || !fifo_empty;
  assign out_desc  = (state == S_DESC);
  assign idx_pop   = (state == S_DESC) && out_ready;

  always_comb begin
    if (state == S_DESC) begin
      out_data = '0;
      out_data[TS_W-1:0]        = idx_empty ? '1 : idx_head;
      out_data[TS_W +: 32]      = n_rec;
      out_data[TS_W + 32 +: 32] = n_words;
      out_data[TS_W + 64 +: 32] = n_drop;
      out_data[TS_W + 96 +: 32] = DESC_MAGIC;
    end else begin
      out_data = head_rec;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_DATA;
      n_rec   <= '0;
      n_words <= '0;
      n_drop  <= '0;
    end else begin
      if (fifo_overflow) n_drop <= n_drop + 1'b1;
      unique case (state)
        S_DATA: if (fifo_rd) begin
          n_rec   <= n_rec + 1'b1;
          n_words <= n_words + 32'(head_words);
          if (head_end) state <= S_DESC;
        end
        S_DESC: if (out_ready) begin
          state   <= S_DATA;
          n_rec   <= '0;
          n_words <= '0;
          n_drop  <= fifo_overflow ? 32'd1 : 32'd0;
        end
      endcase
    end
  end

endmodule
