// Testbench: concentrator_controller (N = 4).
// Random DAQ-word flag patterns of varying density, with flushes, are applied
// for many clocks. A reference model keeps its own fill level and computes,
// independently of the controller, each word's slot, the load/end strobes,
// the aux write strobes and the per-slot sources. The switch settings are
// checked by routing the input numbers through a model of the baseline
// network: every DAQ word must leave at output bitrev(slot).
module tb_concentrator_controller;
  import sts_conc_pkg::*;
  localparam int N = 4;
  localparam int M = 2**N;

  logic clk = 0, rst_n;
  logic [M-1:0] daq_flag;
  logic flush;
  logic [N-1:0][M/2-1:0] sw_ctrl;
  logic [M-1:0] aux_we;
  slot_src_t [M-1:0] out_src;
  logic out_load, out_end;
  logic [N-1:0] fill;
  int checks = 0, failures = 0;
  int n_wrap = 0, n_flush_pad = 0, n_full = 0;

  concentrator_controller #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [M-1:0][7:0] route(input logic [M-1:0][7:0] d,
                                              input logic [N-1:0][M/2-1:0] c);
    logic [M-1:0][7:0] cur, nxt;
    cur = d;
    for (int l = 0; l < N; l++) begin
      int S = M >> l;
      for (int b = 0; b < (1 << l); b++)
        for (int s = 0; s < S/2; s++) begin
          logic x = c[l][b*(S/2)+s];
          nxt[b*S+s]     = x ? cur[b*S+2*s+1] : cur[b*S+2*s];
          nxt[b*S+S/2+s] = x ? cur[b*S+2*s]   : cur[b*S+2*s+1];
        end
      cur = nxt;
    end
    return cur;
  endfunction

  function automatic int rev(input int v);
    int r = 0;
    for (int i = 0; i < N; i++) if (v & (1 << i)) r |= 1 << (N-1-i);
    return r;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_fill;
    rst_n = 0; daq_flag = '0; flush = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ref_fill = 0;
    for (int t = 0; t < 60000; t++) begin
      int dens, k, total, pos;
      logic [M-1:0][7:0] ids, routed;
      logic exp_load;
      dens = (t / 1000) % 5;
      for (int i = 0; i < M; i++)
        daq_flag[i] = (dens == 4) ? 1'b1 : (($urandom % 4) < dens);
      flush = ($urandom % 50) == 0;
      #1;
      k = $countones(daq_flag);
      total = ref_fill + k;
      exp_load = (total >= M) || flush;
      checks++;
      if (fill != N'(ref_fill) || out_load != exp_load || out_end != flush) begin
        failures++;
        if (failures < 5) $display("t=%0d strobe mismatch fill=%0d/%0d", t, fill, ref_fill);
      end
      for (int i = 0; i < M; i++) ids[i] = 8'(i);
      routed = route(ids, sw_ctrl);
      pos = ref_fill;
      for (int i = 0; i < M; i++) begin
        if (daq_flag[i]) begin
          automatic int sl = pos % M;
          automatic logic wrap = pos >= M;
          checks++;
          if (routed[rev(sl)] != 8'(i)) failures++;
          // strobe of this word's slot
          if (!exp_load) begin
            if (!aux_we[sl]) failures++;
          end else begin
            if (wrap && !aux_we[sl]) failures++;
            if (!wrap && (aux_we[sl] || out_src[sl] != SRC_NET)) failures++;
          end
          pos++;
        end
      end
      if (exp_load) begin
        for (int j = 0; j < M; j++) begin
          checks++;
          if (j < ref_fill && out_src[j] != SRC_AUX) failures++;
          if (j >= total && out_src[j] != SRC_FILL) failures++;
        end
        if (total > M && total - M > 0) n_wrap++;
        if (flush && total < M) n_flush_pad++;
      end
      checks++;
      if ($countones(aux_we) != (exp_load ? (total >= M ? total - M : 0) : k)) failures++;
      if (k == M) n_full++;
      ref_fill = (total >= M) ? total - M : (flush ? 0 : total);
      @(negedge clk);
    end
    $display("records wrapping into aux: %0d, padded flushes: %0d, full-input clocks: %0d",
             n_wrap, n_flush_pad, n_full);
    checks++;
    if (n_wrap == 0 || n_flush_pad == 0 || n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
