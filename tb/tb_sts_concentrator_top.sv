// End-to-end testbench of sts_concentrator_top at its default parameters:
// 16 GBT-link groups x 15 e-links, 512-bit records, 256-record output FIFO,
// microslices of 2^15 x 3.125 ns = 16384 clocks, epoch timeout 256 clocks.
//
// The e-links are driven with 24-bit hit-like words (bit 23 set) at legal
// rates (at most one word per 15 clocks each). Five e-links of group 2 never
// send, so only artificial epoch markers come from them. A scoreboard per
// e-link checks that every word comes out once, unchanged, in order and with
// the right source ID; markers are recognised by their 2'b01 header and must
// carry a valid CRC-4 and three equal copies of the timestamp bits.
// Descriptors must follow each microslice with consecutive numbers and with
// record and word counts that match what the testbench saw.
//
// Phases: random traffic with occasional output back-pressure; all e-links
// at full rate (one 512-bit record per clock must come out of the
// concentrator); full rate with the output stalled long enough to overflow
// the output FIFO (records are dropped; words then only need to stay in
// order); a TFC reload of the local time; drain; a rate violation on one
// e-link (overrun flag). Each mechanism is counted and must occur.
module tb_sts_concentrator_top;
  import sts_conc_pkg::*;
  localparam int N = 4, M = 16, NE = 15, RW = M * WORD_W;
  localparam int MS_CLK = 16384;

  logic clk = 0, rst_n, tfc_sync, out_valid, out_ready, out_desc;
  logic [63:0] tfc_ts;
  logic [M-1:0][LINK_ID_W-1:0] link_id;
  logic [M-1:0][NE-1:0] elink_valid, elink_overrun;
  elink_data_t [M-1:0][NE-1:0] elink_data;
  logic [RW-1:0] out_data;
  int checks = 0, failures = 0;

  sts_concentrator_top dut (.*);
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- model
  elink_data_t sb[M*NE][$];
  int  next_ok[M*NE];
  bit  lenient = 0;
  bit  p5 = 0;                 // rate-violation words are not compared
  int  cyc = 0;
  int  n_words = 0, n_markers = 0, n_fill = 0, n_rec = 0, n_desc = 0, n_lost = 0;
  int  rec_since = 0, words_since = 0;
  longint last_idx = -1;
  int  n_full_in = 0, n_aux = 0, n_stall = 0, n_drop_desc = 0, n_jump = 0, n_padded = 0;
  int  p2_recs = 0, p2_words = 0;
  bit  in_p2 = 0;

  function automatic bit marker_ok(input elink_data_t d);
    logic [23:0] v;
    if (d[23:22] != 2'b01 || d[21:16] != d[15:10] || d[15:10] != d[9:4]) return 0;
    v = {d[23:4], 4'b0000};
    for (int i = 23; i >= 4; i--) if (v[i]) v[i -: 5] = v[i -: 5] ^ 5'b10011;
    return v[3:0] == d[3:0];
  endfunction

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism probes inside the design
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (dut.daq_flag == '1) n_full_in++;
    if (dut.u_conc.out_load && dut.u_conc.fill != 0 && !dut.u_conc.flush) n_aux++;
    if (out_valid && !out_ready) n_stall++;
    if (in_p2 && dut.rec_valid) p2_recs++;
    if (in_p2) p2_words += $countones(dut.daq_flag);
  end

  // output monitor
  always @(negedge clk) if (rst_n && out_valid && out_ready && !p5) begin
    if (out_desc) begin
      longint idx;
      n_desc++;
      idx = longint'(out_data[63:0]);
      checks++;
      if (out_data[160 +: 32] != 32'h4D53_4C43 ||
          out_data[64 +: 32] != 32'(rec_since) || out_data[96 +: 32] != 32'(words_since)) begin
        failures++;
        $display("descriptor %0d: records %0d/%0d words %0d/%0d", idx,
                 out_data[64 +: 32], rec_since, out_data[96 +: 32], words_since);
      end
      if (last_idx >= 0 && idx != last_idx + 1) begin
        n_jump++;
        if (n_jump > 1) failures++;   // only the one TFC reload may cause a jump
      end
      if (out_data[128 +: 32] != 0) n_drop_desc++;
      last_idx = idx;
      rec_since = 0; words_since = 0;
    end else begin
      automatic bit padded = 0;
      n_rec++; rec_since++;
      for (int j = 0; j < M; j++) begin
        daq_word_t w;
        int g, k;
        w = out_data[j*WORD_W +: WORD_W];
        if (w.elink == FILLER_ELINK) begin n_fill++; padded = 1; continue; end
        words_since++;
        g = -1;
        for (int i = 0; i < M; i++) if (link_id[i] == w.link) g = i;
        checks++;
        if (g < 0 || w.elink >= NE) begin failures++; continue; end
        k = g * NE + w.elink;
        if (w.data[23:22] == 2'b01) begin
          n_markers++;
          if (!marker_ok(w.data)) failures++;
        end else begin
          n_words++;
          if (sb[k].size() != 0 && sb[k][0] == w.data) void'(sb[k].pop_front());
          else if (lenient) begin
            automatic int found = -1;
            for (int q = 0; q < sb[k].size(); q++) if (sb[k][q] == w.data) begin found = q; break; end
            if (found < 0) failures++;
            else begin
              n_lost += found;
              for (int q = 0; q <= found; q++) void'(sb[k].pop_front());
            end
          end else begin
            failures++;
            if (failures < 8) $display("cyc %0d: e-link %0d/%0d got %h", cyc, g, w.elink, w.data);
          end
        end
      end
      if (padded) n_padded++;
    end
  end

  // traffic: rate_num/64 = probability an e-link sends once allowed
  task automatic drive(input int rate_num);
    int now = int'($time / 10);
    for (int g = 0; g < M; g++)
      for (int e = 0; e < NE; e++) begin
        int k = g * NE + e;
        elink_valid[g][e] = 1'b0;
        if (g == 2 && e < 5) continue;                 // silent e-links
        if (now >= next_ok[k] && ($urandom % 64) < rate_num) begin
          elink_valid[g][e] = 1'b1;
          elink_data[g][e]  = {1'b1, 23'($urandom)};
          sb[k].push_back(elink_data[g][e]);
          next_ok[k] = now + 15;
        end
      end
  endtask

  initial begin
    rst_n = 0; tfc_sync = 0; tfc_ts = '0; out_ready = 1;
    elink_valid = '0; elink_data = '0;
    for (int i = 0; i < M; i++) link_id[i] = 4'(i ^ 5);
    for (int k = 0; k < M * NE; k++) next_ok[k] = $urandom % 15;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // P1: random traffic, occasional short back-pressure
    for (int t = 0; t < 20000; t++) begin
      drive(2 + (t / 2000) % 4);
      out_ready = ($urandom % 8) != 0;
      @(negedge clk);
    end
    // P2: every e-link at its maximum rate
    out_ready = 1;
    for (int t = 0; t < 2000; t++) begin
      in_p2 = t >= 100;
      drive(64);
      @(negedge clk);
    end
    in_p2 = 0;
    // No stall: every 16 words offered make one record, within one record.
    checks++;
    if (p2_recs * M < p2_words - 2 * M || p2_recs * M > p2_words + 2 * M) failures++;
    $display("full-rate window: %0d words in, %0d records in 1900 clocks", p2_words, p2_recs);
    // P3: full rate with the output stalled: the FIFO overflows
    lenient = 1;
    out_ready = 0;
    for (int t = 0; t < 600; t++) begin drive(64); @(negedge clk); end
    out_ready = 1;
    for (int t = 0; t < 3000; t++) begin drive(4); @(negedge clk); end
    lenient = 0;
    // P4: TFC reload of the local time, then traffic over two more boundaries
    elink_valid = '0;
    tfc_sync = 1; tfc_ts = 64'h0000_0100_0000_0000;
    @(negedge clk);
    tfc_sync = 0;
    for (int t = 0; t < 2 * MS_CLK; t++) begin
      drive(3);
      out_ready = ($urandom % 8) != 0;
      @(negedge clk);
    end
    // drain: no traffic until the next boundary has flushed everything
    elink_valid = '0; out_ready = 1;
    repeat (MS_CLK + 500) @(negedge clk);
    for (int k = 0; k < M * NE; k++) begin
      checks++;
      if (sb[k].size() != 0) begin
        failures++;
        $display("e-link %0d: %0d words never came out", k, sb[k].size());
      end
    end
    checks++;
    if (elink_overrun != '0) failures++;
    // P5: rate violation on e-link 7 of group 3
    p5 = 1;
    for (int t = 0; t < 4; t++) begin
      elink_valid[3][7] = 1; elink_data[3][7] = 24'h8ABCDE;
      @(negedge clk);
    end
    elink_valid = '0;
    repeat (20) @(negedge clk);
    checks++;
    if (elink_overrun[3][7] != 1'b1 || $countones(elink_overrun) != 1) failures++;

    $display("records %0d, descriptors %0d, words %0d, markers %0d, fillers %0d, lost %0d",
             n_rec, n_desc, n_words, n_markers, n_fill, n_lost);
    $display("mechanisms: full-input clocks %0d, records using aux %0d, padded records %0d,",
             n_full_in, n_aux, n_padded);
    $display("            output stalls %0d, descriptors with drops %0d, index jumps %0d",
             n_stall, n_drop_desc, n_jump);
    checks += 8;
    if (n_full_in == 0)   begin failures++; $display("never: full input"); end
    if (n_aux == 0)       begin failures++; $display("never: aux record used"); end
    if (n_padded == 0)    begin failures++; $display("never: padded flush"); end
    if (n_markers == 0)   begin failures++; $display("never: epoch marker"); end
    if (n_stall == 0)     begin failures++; $display("never: back-pressure"); end
    if (n_drop_desc == 0) begin failures++; $display("never: FIFO overflow"); end
    if (n_jump != 1)      begin failures++; $display("TFC reload jump count %0d", n_jump); end
    if (n_desc < 4)       begin failures++; $display("too few microslices"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
