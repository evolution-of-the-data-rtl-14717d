// Testbench: data_concentrator (N = 4, 512-bit records).
// A reference model appends the DAQ words of each clock, in input order, to a
// queue and cuts it into 16-word records; a flush closes the record early
// with filler words (the words of the flush clock that still fit are in it).
// Every record must match exactly, including its end flag. With all 16
// inputs busy the concentrator must produce one record every clock, and each
// record must appear the clock after the clock that completed it.
module tb_data_concentrator;
  import sts_conc_pkg::*;
  localparam int N = 4, M = 2**N;
  logic clk = 0, rst_n, flush;
  logic [M-1:0] daq_flag;
  daq_word_t [M-1:0] din, rec;
  logic rec_valid, rec_end;
  int checks = 0, failures = 0;
  daq_word_t pend[$];
  typedef daq_word_t [M-1:0] rec_t;
  rec_t exp_rec[$];
  bit exp_end[$];
  int exp_time[$];
  int cyc = 0, n_rec = 0, n_full_clocks = 0, n_pad = 0, n_wrap = 0;
  int run_full = 0, run_rec = 0;

  data_concentrator #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cut(input bit fl);
    rec_t r;
    bit padded = 0;
    for (int j = 0; j < M; j++) begin
      if (pend.size() > 0) r[j] = pend.pop_front();
      else begin r[j] = FILLER_WORD; padded = 1; end
    end
    if (padded) n_pad++;
    exp_rec.push_back(r);
    exp_end.push_back(fl);
    exp_time.push_back(int'($time) + 10);
  endtask

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (rec_valid) begin
      n_rec++;
      checks++;
      if (exp_rec.size() == 0) failures++;
      else begin
        rec_t r;
        r = exp_rec.pop_front();
        for (int j = 0; j < M; j++) if (rec[j] != r[j]) begin
          failures++;
          if (failures < 6) $display("cyc %0d slot %0d got %h exp %h", cyc, j, rec[j], r[j]);
        end
        if (rec_end != exp_end.pop_front()) failures++;
        if (int'($time) != exp_time.pop_front()) failures++;
      end
    end
  end

  initial begin
    int serial = 0;
    rst_n = 0; flush = 0; daq_flag = '0; din = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      automatic int dens = (t / 500) % 6;
      int before_n;
      before_n = pend.size();
      flush = ($urandom % 64) == 0;
      for (int i = 0; i < M; i++) begin
        daq_flag[i] = (dens == 5) ? 1'b1 : (($urandom % 5) < dens);
        din[i] = '{link: 4'(i), elink: 4'($urandom % 15), data: 24'(serial)};
        serial++;
        if (daq_flag[i]) pend.push_back(din[i]);
      end
      if (daq_flag == '1) n_full_clocks++;
      if (pend.size() >= M) begin
        if (before_n > 0) n_wrap++;
        cut(flush);
      end else if (flush) cut(1'b1);
      if (dens == 5 && t % 500 > 2) begin run_full++; end
      @(negedge clk);
      if (dens == 5 && t % 500 > 2) begin
        checks++;
        if (!rec_valid) failures++;   // one 512-bit record per clock at full input
      end
    end
    daq_flag = '0; flush = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_rec.size() != 0) failures++;
    $display("records %0d, full-input clocks %0d, padded %0d, records using aux words %0d",
             n_rec, n_full_clocks, n_pad, n_wrap);
    checks++;
    if (n_pad == 0 || n_wrap == 0 || n_full_clocks == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
