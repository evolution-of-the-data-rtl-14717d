// Testbench: output_record (N = 4).
// Random loads with random per-slot sources; after each load the record must
// hold aux, network or filler words as selected, and rec_valid/rec_end must
// be high for exactly the clock after the load.
module tb_output_record;
  import sts_conc_pkg::*;
  localparam int N = 4, M = 2**N, W = 32;
  logic clk = 0, rst_n, load, end_in;
  slot_src_t [M-1:0] src;
  logic [M-1:0][W-1:0] net, aux, rec, expect_rec;
  logic rec_valid, rec_end;
  int checks = 0, failures = 0;

  output_record #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_end;
    rst_n = 0; load = 0; end_in = 0; src = '0; net = '0; aux = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    checks++;
    if (rec_valid) failures++;
    expect_rec = '0;
    for (int t = 0; t < 3000; t++) begin
      logic do_load;
      do_load = ($urandom % 3) == 0;
      load = do_load;
      end_in = $urandom;
      exp_end = do_load && end_in;
      for (int j = 0; j < M; j++) begin
        src[j] = slot_src_t'($urandom % 3);
        net[j] = $urandom;
        aux[j] = $urandom;
        if (do_load)
          expect_rec[j] = (src[j] == SRC_AUX) ? aux[j] :
                          (src[j] == SRC_NET) ? net[j] : 32'hFF00_0000;
      end
      @(negedge clk);
      checks++;
      if (rec_valid != do_load || rec_end != exp_end) failures++;
      if (do_load) begin
        checks++;
        if (rec != expect_rec) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
