// tb_chan_est: loads random reference weights, streams three random symbols
// through with random valid and ready, and compares every output with an
// integer model of Y[k]*W[k] >> 15 (saturated), bin by bin.
`timescale 1ns/1ps
module tb_chan_est;
  import isac_pkg::*;

  localparam int N = isac_pkg::N_FFT;
  localparam int LOG2N = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic ref_wr_en, in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [LOG2N-1:0] ref_wr_addr;
  iq_t ref_wr_data;
  cplx_t in_data, out_data;
  iq_t w [N];
  cplx_t q_in [$];
  int checks = 0, failures = 0;

  always #1 clk = ~clk;
  chan_est dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(input longint v);
    if (v > 8388607) return 8388607;
    if (v < -8388608) return -8388608;
    return v;
  endfunction

  // checker
  int nout = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    cplx_t y;
    int k;
    longint er, ei;
    y = q_in.pop_front();
    k = nout % N;
    er = sat((longint'(y.re) * w[k].re - longint'(y.im) * w[k].im) >>> 15);
    ei = sat((longint'(y.re) * w[k].im + longint'(y.im) * w[k].re) >>> 15);
    checks++;
    if (longint'(out_data.re) != er || longint'(out_data.im) != ei || out_last != (k == N - 1)) begin
      failures++;
      if (failures < 10) $display("bin %0d: got %0d,%0d want %0d,%0d", k, out_data.re, out_data.im, er, ei);
    end
    nout++;
  end

  always @(posedge clk) #0.3 out_ready = ($urandom_range(4) != 0);

  initial begin
    ref_wr_en = 0; in_valid = 0; in_last = 0; in_data = '0; ref_wr_addr = '0; ref_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N; k++) begin
      w[k] = iq_t'($urandom);
      if (k == 5) w[k] = '{im: 16'sh8000, re: 16'sh8000};   // extreme weight, drives saturation
      @(negedge clk);
      ref_wr_en = 1; ref_wr_addr = LOG2N'(k); ref_wr_data = w[k];
    end
    @(negedge clk) ref_wr_en = 0;
    for (int s = 0; s < 3; s++) begin
      for (int k = 0; k < N; k++) begin
        cplx_t y;
        y.re = DW'($urandom);
        y.im = DW'($urandom);
        while ($urandom_range(3) == 0) @(negedge clk);
        in_valid = 1; in_data = y; in_last = (k == N - 1);
        while (!in_ready) @(negedge clk);
        q_in.push_back(y);
        @(negedge clk);
        in_valid = 0; in_last = 0;
      end
    end
    while (nout < 3 * N) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
