// Testbench: microslice_generator (N = 4, microslices of 2^6 timestamp units
// = 32 clocks for speed).
// The testbench plays the concentrator and the output FIFO: it answers each
// flush request with a record carrying the end flag, adds random data records
// in between (some with filler slots) and injects FIFO overflow pulses. It
// checks that flush_req comes exactly once per microslice, one clock after
// the local time enters a new microslice, that records leave in order under
// random out_ready, and that each end record is followed by a descriptor
// with the closed microslice's number, its record and DAQ-word counts and
// the number of dropped records.
module tb_microslice_generator;
  import sts_conc_pkg::*;
  localparam int N = 4, M = 2**N, RW = M * WORD_W, MSL = 6;
  logic clk = 0, rst_n;
  logic [63:0] ts;
  logic flush_req, fifo_empty, fifo_rd, fifo_overflow;
  logic [RW:0] fifo_data;
  logic out_valid, out_ready, out_desc;
  logic [RW-1:0] out_data;
  int checks = 0, failures = 0;

  logic [RW:0] fq[$];          // FIFO model contents
  logic [RW:0] sent[$];        // records expected at the output, in order
  longint      idxq[$];        // microslice numbers of closed microslices
  int          recs_q[$], words_q[$], drops_q[$];
  int n_rec = 0, n_words = 0, n_drop = 0, n_desc = 0, n_flush = 0;
  bit drop_pending_desc = 0;

  microslice_generator #(.N(N), .TS_W(64), .MS_LOG2(MSL)) dut (.*);
  always #5 clk = ~clk;


  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [RW:0] make_rec(input bit last);
    logic [RW:0] r;
    int fill = ($urandom % 3 == 0) ? $urandom % M : M;
    for (int j = 0; j < M; j++)
      r[j*WORD_W +: WORD_W] = (j < fill) ? {4'($urandom), 4'($urandom % 15), 24'($urandom)}
                                         : 32'(FILLER_WORD);
    r[RW] = last;
    return r;
  endfunction

  function automatic int count_words(input logic [RW:0] r);
    int c = 0;
    for (int j = 0; j < M; j++) if (r[j*WORD_W + 24 +: 4] != 4'hF) c++;
    return c;
  endfunction

  initial begin
    longint prev_ms, prev2_ms;
    logic [RW:0] r;
    int since_rec, since_words, since_drop;
    rst_n = 0; ts = 0; out_ready = 0; fifo_overflow = 0; fifo_empty = 1; fifo_data = '0;
    since_rec = 0; since_words = 0; since_drop = 0;
    @(negedge clk);
    rst_n = 1;
    prev_ms = 0; prev2_ms = 0;
    for (int t = 0; t < 6000; t++) begin
      bit exp_flush, desc_acc, rd;
      // ---- inputs of this clock
      ts = ts + 2;
      if (t == 3000) ts = 64'h0000_0001_0000_0000;   // TFC reload: jump in time
      out_ready = ($urandom % 4) != 0;
      fifo_overflow = ($urandom % 97) == 0;
      fifo_empty = (fq.size() == 0);
      fifo_data  = fq.size() ? fq[0] : '0;
      #1;
      // ---- flush request: the clock after the microslice number changed
      exp_flush = (t > 0) && (prev_ms != prev2_ms);
      checks++;
      if (flush_req != exp_flush) failures++;
      // ---- output check
      desc_acc = out_valid && out_desc && out_ready;
      if (out_valid && out_ready) begin
        checks++;
        if (out_desc) begin
          n_desc++;
          if (idxq.size() == 0 || recs_q.size() == 0) failures++;
          else begin
            automatic longint ei = idxq.pop_front();
            if (out_data[63:0] != 64'(ei) || out_data[64 +: 32] != 32'(recs_q.pop_front()) ||
                out_data[96 +: 32] != 32'(words_q.pop_front()) ||
                out_data[128 +: 32] != 32'(since_drop) ||
                out_data[160 +: 32] != 32'h4D53_4C43) begin
              failures++;
              if (failures < 5) $display("desc mismatch t=%0d idx %0d/%0d", t, out_data[63:0], ei);
            end
          end
        end else begin
          if (sent.size() == 0 || out_data != sent[0][RW-1:0]) failures++;
          r = sent.pop_front();
          since_rec++;
          since_words += count_words(r);
          if (r[RW]) begin
            recs_q.push_back(since_rec);
            words_q.push_back(since_words);
            since_rec = 0; since_words = 0;
          end
        end
      end
      checks++;
      rd = !out_desc && out_valid && out_ready;
      if (fifo_rd != rd) failures++;
      // drops counted for the descriptor accepted in this clock exclude this clock's pulse
      if (desc_acc) since_drop = 0;
      if (fifo_overflow) since_drop++;
      // ---- advance the FIFO model at the edge
      if (fifo_rd && fq.size() > 0) void'(fq.pop_front());
      if (flush_req) begin
        n_flush++;
        idxq.push_back(prev2_ms);
        r = make_rec(1);
        fq.push_back(r); sent.push_back(r);
      end else if (($urandom % 3) == 0) begin
        r = make_rec(0);
        fq.push_back(r); sent.push_back(r);
      end
      prev2_ms = prev_ms;
      prev_ms  = longint'(ts >> MSL);
      @(negedge clk);
    end
    $display("flushes %0d, descriptors %0d", n_flush, n_desc);
    checks++;
    if (n_flush < 100 || n_desc < n_flush - 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
