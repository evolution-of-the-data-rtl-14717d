// Testbench: output_fifo (W = 40, DEPTH = 16 for speed).
// Random writes and reads against a queue model: head data, empty, full,
// count and the overflow pulse for a write into a full FIFO. Phases with
// mostly writes and mostly reads make it fill and drain completely.
module tb_output_fifo;
  localparam int W = 40, DEPTH = 16;
  logic clk = 0, rst_n, wr_en, rd_en;
  logic [W-1:0] wr_data, rd_data;
  logic empty, full, overflow;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0, n_ovf = 0, n_full = 0;
  logic [W-1:0] q[$];

  output_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_ovf;
    rst_n = 0; wr_en = 0; rd_en = 0; wr_data = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      automatic int ph = (t / 200) % 3;
      wr_en = ($urandom % 4) < (ph == 0 ? 3 : ph == 1 ? 1 : 2);
      rd_en = ($urandom % 4) < (ph == 0 ? 1 : ph == 1 ? 3 : 2);
      wr_data = {$urandom, 8'($urandom)};
      #1;
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || count != q.size())
        failures++;
      if (q.size() > 0) begin
        checks++;
        if (rd_data != q[0]) failures++;
      end
      if (full) n_full++;
      exp_ovf = wr_en && q.size() == DEPTH && !rd_en;
      if (rd_en && q.size() > 0) void'(q.pop_front());
      if (wr_en && !exp_ovf) q.push_back(wr_data);
      @(negedge clk);
      checks++;
      if (overflow != exp_ovf) failures++;
      if (overflow) n_ovf++;
    end
    $display("overflows %0d, clocks full %0d", n_ovf, n_full);
    checks++;
    if (n_ovf == 0 || n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
