// Testbench: aux_record (N = 4, 32-bit words).
// Random per-slot write strobes and data; a shadow array written in the same
// clocks must equal the record after every edge.
module tb_aux_record;
  localparam int N = 4, M = 2**N, W = 32;
  logic clk = 0;
  logic [M-1:0] we;
  logic [M-1:0][W-1:0] din, q, shadow;
  int checks = 0, failures = 0;

  aux_record #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int j = 0; j < M; j++) din[j] = $urandom;
    we = '1; shadow = din;
    @(negedge clk);
    for (int t = 0; t < 2000; t++) begin
      we = M'($urandom);
      for (int j = 0; j < M; j++) din[j] = $urandom;
      for (int j = 0; j < M; j++) if (we[j]) shadow[j] = din[j];
      @(negedge clk);
      checks++;
      if (q != shadow) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
