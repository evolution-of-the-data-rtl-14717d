// Testbench: epoch_inserter (TIMEOUT = 20 for speed).
// Real words must pass with one clock of latency. After exactly TIMEOUT idle
// clocks a marker must appear, holding 2'b01, ts[13:8] three times and the
// CRC-4 (x^4+x+1) of those 20 bits, here computed as the remainder of a
// polynomial division of the 20 bits followed by four zeros.
module tb_epoch_inserter;
  import sts_conc_pkg::*;
  localparam int TO = 20;
  logic clk = 0, rst_n, in_valid, out_valid, inserted;
  elink_data_t in_data, out_data;
  logic [5:0] ts_msb;
  int checks = 0, failures = 0, n_markers = 0;

  epoch_inserter #(.TIMEOUT(TO)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [23:0] ref_marker(input logic [5:0] m);
    logic [23:0] v;
    v = {2'b01, m, m, m, 4'b0000};
    for (int i = 23; i >= 4; i--)
      if (v[i]) v[i -: 5] = v[i -: 5] ^ 5'b10011;
    return {2'b01, m, m, m, v[3:0]};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idle;
    logic       exp_v, exp_ins;
    logic [23:0] exp_d;
    rst_n = 0; in_valid = 0; in_data = '0; ts_msb = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    idle = 0;
    for (int t = 0; t < 5000; t++) begin
      // quiet stretches longer than TIMEOUT alternate with busy ones
      in_valid = ((t / 300) % 2 == 0) ? (($urandom % 4) == 0) : (($urandom % 200) == 0);
      in_data  = {1'b1, 23'($urandom)};
      ts_msb   = 6'($urandom);
      exp_ins  = !in_valid && idle == TO - 1;
      exp_v    = in_valid || exp_ins;
      exp_d    = in_valid ? in_data : ref_marker(ts_msb);
      idle     = exp_v ? 0 : idle + 1;
      @(negedge clk);
      checks++;
      if (out_valid != exp_v || inserted != exp_ins || (exp_v && out_data != exp_d)) begin
        failures++;
        if (failures < 5) $display("t=%0d v=%0b/%0b d=%h/%h", t, out_valid, exp_v, out_data, exp_d);
      end
      if (inserted) n_markers++;
    end
    $display("markers inserted: %0d", n_markers);
    checks++;
    if (n_markers == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
