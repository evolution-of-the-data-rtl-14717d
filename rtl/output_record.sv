// Output record: the 2^N-word record handed to the output FIFO.
//
// On `load` every slot is written at once, each from the source the
// concentrator controller selects: the aux record (words of earlier clocks),
// the network (words of this clock) or the filler word (slots left empty
// when a record is closed at a microslice boundary). rec_valid, the output
// strobe, is high for exactly the clock after each load, together with the
// record and its end-of-microslice flag.
module output_record
  import sts_conc_pkg::*;
#(
  parameter int unsigned N = 4,
  parameter int unsigned W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   load,
  input  logic                   end_in,
  input  slot_src_t [2**N-1:0]   src,
  input  logic [2**N-1:0][W-1:0] net,
  input  logic [2**N-1:0][W-1:0] aux,
  output logic                   rec_valid,
  output logic                   rec_end,
  output logic [2**N-1:0][W-1:0] rec
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rec_valid <= 1'b0;
      rec_end   <= 1'b0;
      rec       <= '0;
    end else begin
      rec_valid <= load;
      rec_end   <= load && end_in;
      if (load) begin
        for (int j = 0; j < 2**N; j++) begin
          unique case (src[j])
            SRC_AUX: rec[j] <= aux[j];
            SRC_NET: rec[j] <= net[j];
            default: rec[j] <= W'(FILLER_WORD);
          endcase
        end
      end
    end
  end
endmodule
