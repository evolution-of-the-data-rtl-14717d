// Testbench: elink_group_serializer (15 e-links).
// Phase 1: every e-link sends at its maximum rate, one word per 15 clocks,
// with random phases; the serializer must then emit a word in every clock
// (160 Mwords/s = 15 x 10.67 Mwords/s). Phase 2: random traffic with gaps of
// at least 15 clocks. Each output word must carry the GBT-link number and
// its e-link number, arrive in per-e-link order, within 16 clocks, and no
// overrun may occur. Phase 3: one e-link sends in four clocks in a row (more than
// its two-word buffer and one slot can take) and must set
// its overrun flag.
module tb_elink_group_serializer;
  import sts_conc_pkg::*;
  localparam int NE = 15;
  logic clk = 0, rst_n;
  logic [LINK_ID_W-1:0] link_id;
  logic [NE-1:0] elink_valid, overrun;
  elink_data_t [NE-1:0] elink_data;
  logic daq_flag;
  daq_word_t out_word;
  int checks = 0, failures = 0;
  int cyc = 0;
  int next_ok [NE];
  elink_data_t q[NE][$];
  int          qt[NE][$];
  int n_out = 0, busy_run = 0, max_lat = 0;
  bit phase1;
  bit phase3 = 0;

  elink_group_serializer #(.NUM_ELINKS(NE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker
  always @(negedge clk) if (rst_n && !phase3) begin
    cyc++;
    if (daq_flag) begin
      int e;
      e = out_word.elink;
      n_out++;
      checks++;
      if (out_word.link != link_id || e >= NE || q[e].size() == 0) failures++;
      else begin
        if (out_word.data != q[e][0]) failures++;
        if (int'($time / 10) - qt[e][0] > max_lat) max_lat = int'($time / 10) - qt[e][0];
        void'(q[e].pop_front());
        void'(qt[e].pop_front());
      end
    end
  end

  initial begin
    rst_n = 0; link_id = 4'd9; elink_valid = '0; elink_data = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < NE; e++) next_ok[e] = $urandom % 15;
    for (int t = 0; t < 4000; t++) begin
      phase1 = t < 1500;
      for (int e = 0; e < NE; e++) begin
        elink_valid[e] = 1'b0;
        if (t >= next_ok[e] && (phase1 || ($urandom % 20) == 0)) begin
          elink_valid[e] = 1'b1;
          elink_data[e]  = {1'b1, 23'($urandom)};
          q[e].push_back(elink_data[e]);
          qt[e].push_back(int'($time / 10));
          next_ok[e] = t + 15;
        end
      end
      if (t > 100 && t < 1500) begin
        // full rate: every clock must carry a word
        checks++;
        if (!daq_flag) failures++;
      end
      @(negedge clk);
    end
    elink_valid = '0;
    repeat (40) @(negedge clk);
    for (int e = 0; e < NE; e++) begin
      checks++;
      if (q[e].size() != 0) failures++;
    end
    checks++;
    if (overrun != '0) failures++;
    checks++;
    if (max_lat > 16) failures++;
    $display("words out %0d, max latency %0d clocks", n_out, max_lat);
    // Two words one clock apart (a marker just before a data word) fit the
    // two-word buffer: both must come out, in order, without overrun.
    for (int t = 0; t < 2; t++) begin
      elink_valid[6] = 1; elink_data[6] = 24'h900000 + 24'(t);
      q[6].push_back(elink_data[6]);
      qt[6].push_back(int'($time / 10));
      @(negedge clk);
    end
    elink_valid = '0;
    repeat (40) @(negedge clk);
    checks++;
    if (q[6].size() != 0 || overrun != '0) failures++;
    // Phase 3: rate violation on e-link 4 (output not compared)
    phase3 = 1;
    elink_valid[4] = 1; elink_data[4] = 24'h800001;
    @(negedge clk);
    elink_data[4] = 24'h800002;
    @(negedge clk);
    elink_data[4] = 24'h800003;
    @(negedge clk);
    elink_data[4] = 24'h800004;
    @(negedge clk);
    elink_valid = '0;
    repeat (20) @(negedge clk);
    checks++;
    if (overrun != NE'(1 << 4)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
