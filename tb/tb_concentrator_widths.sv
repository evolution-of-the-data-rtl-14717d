// Testbench: data_concentrator at the other record widths.
// Runs three concentrators side by side, at N = 1 (64-bit records), N = 3
// (256-bit) and N = 5 (1024-bit, 32 inputs), each with its own stimulus and
// reference model. The model appends the DAQ words of each clock, in input
// order, to a queue and cuts it into 2^N-word records; a flush closes the
// record early with filler words. Every record must match word for word,
// with its end flag, in the clock after the clock that completed it, and at
// full input each instance must produce one record every clock.
// The default build is N = 4; this bench shows that the same RTL holds at
// the other widths without change.
module tb_concentrator_widths;
  import sts_conc_pkg::*;
  localparam int NW = 3;
  localparam int NS[NW] = '{1, 3, 5};
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  bit done[NW];

  always #5 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar gi = 0; gi < NW; gi++) begin : g
    localparam int N = NS[gi], M = 2**N;
    typedef daq_word_t [M-1:0] rec_t;
    logic flush = 0, rec_valid, rec_end;
    logic [M-1:0] daq_flag = '0;
    rec_t din = '0, rec;
    daq_word_t pend[$];
    rec_t exp_rec[$];
    bit exp_end[$];
    int exp_time[$];
    int chk = 0, fail = 0, n_rec = 0, n_pad = 0, n_wrap = 0, n_full = 0;

    data_concentrator #(.N(N)) dut (
      .clk, .rst_n, .daq_flag, .din, .flush, .rec_valid, .rec_end, .rec
    );

    task automatic cut(input bit fl);
      rec_t r;
      bit padded;
      padded = 0;
      for (int j = 0; j < M; j++) begin
        if (pend.size() > 0) r[j] = pend.pop_front();
        else begin r[j] = FILLER_WORD; padded = 1; end
      end
      if (padded) n_pad++;
      exp_rec.push_back(r);
      exp_end.push_back(fl);
      exp_time.push_back(int'($time) + 10);
    endtask

    always @(negedge clk) if (rst_n && rec_valid) begin
      rec_t r;
      n_rec++;
      chk++;
      if (exp_rec.size() == 0) fail++;
      else begin
        r = exp_rec.pop_front();
        if (rec != r) begin
          fail++;
          if (fail < 4) $display("N=%0d record %0d differs", N, n_rec);
        end
        if (rec_end != exp_end.pop_front()) fail++;
        if (int'($time) != exp_time.pop_front()) fail++;
      end
    end

    initial begin
      int serial;
      serial = gi << 24;
      @(posedge rst_n);
      @(negedge clk);
      for (int t = 0; t < 12000; t++) begin
        automatic int dens = (t / 400) % 6;
        automatic int before_n = pend.size();
        flush = ($urandom % 48) == 0;
        for (int i = 0; i < M; i++) begin
          daq_flag[i] = (dens == 5) ? 1'b1 : (($urandom % 5) < dens);
          din[i] = '{link: 4'(i), elink: 4'($urandom % 15), data: 24'(serial)};
          serial++;
          if (daq_flag[i]) pend.push_back(din[i]);
        end
        if (daq_flag == '1) n_full++;
        if (pend.size() >= M) begin
          if (before_n > 0) n_wrap++;
          cut(flush);
        end else if (flush) cut(1'b1);
        @(negedge clk);
        if (dens == 5 && t % 400 > 2) begin
          chk++;
          if (!rec_valid) fail++;
        end
      end
      daq_flag = '0; flush = 0;
      repeat (4) @(negedge clk);
      chk++;
      if (exp_rec.size() != 0) fail++;
      chk++;
      if (n_pad == 0 || n_wrap == 0 || n_full == 0) fail++;
      $display("N=%0d (%0d-bit records): records %0d, full-input clocks %0d, padded %0d, using aux %0d",
               N, 32 * M, n_rec, n_full, n_pad, n_wrap);
      done[gi] = 1;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2]);
    checks = g[0].chk + g[1].chk + g[2].chk;
    failures = g[0].fail + g[1].fail + g[2].fail;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
