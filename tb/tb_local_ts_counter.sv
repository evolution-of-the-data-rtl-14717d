// Testbench: local_ts_counter (64 bits, step 2).
// Counts from reset, is reloaded by TFC at random clocks, and must advance
// by exactly 2 per clock between loads.
module tb_local_ts_counter;
  logic clk = 0, rst_n, tfc_sync;
  logic [63:0] tfc_ts, ts, model;
  int checks = 0, failures = 0, n_sync = 0;

  local_ts_counter #(.TS_W(64), .STEP(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; tfc_sync = 0; tfc_ts = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    model = 0;
    checks++;
    if (ts != 0) failures++;
    for (int t = 0; t < 2000; t++) begin
      tfc_sync = ($urandom % 100) == 0;
      tfc_ts = {$urandom, $urandom};
      if (t == 1000) begin tfc_sync = 1; tfc_ts = 64'hFFFF_FFFF_FFFF_FFF0; end
      model = tfc_sync ? tfc_ts : model + 2;
      if (tfc_sync) n_sync++;
      @(negedge clk);
      checks++;
      if (ts != model) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
