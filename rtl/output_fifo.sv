// Synchronous FIFO between the output record and the microslice generator.
//
// DEPTH entries of W bits in a memory array with first-word fall-through
// reads: rd_data always shows the oldest entry while !empty, and rd_en pops
// it. Detector data cannot be held back, so a write into a full FIFO is
// dropped and reported by a one-clock `overflow` pulse; a write and a read in
// the same clock on a full FIFO succeed. DEPTH must be a power of two.
// Depth, read style and drop policy are this design's choices.
module output_fifo #(
  parameter int unsigned W     = 513,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  output logic [W-1:0]             rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     overflow
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wr_ptr, rd_ptr;
  logic          do_wr, do_rd;

  assign empty   = (wr_ptr == rd_ptr);
  assign full    = (wr_ptr[AW] != rd_ptr[AW]) && (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]);
  assign count   = wr_ptr - rd_ptr;
  assign rd_data = mem[rd_ptr[AW-1:0]];
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      overflow <= wr_en && !do_wr;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("DEPTH must be a power of two");

endmodule
