// tb_fft_engine: checks fft_engine at its default size (4096 points).
//
// Feeds random complex vectors, once as forward FFT and once as IFFT, and
// compares every output bin with a double-precision reference scaled by 1/N.
// The output stream is throttled at random to exercise back-pressure. Also
// checks that the compute phase takes exactly N/2*log2(N) cycles, from the
// last accepted input to the first offered output.
`timescale 1ns/1ps
module tb_fft_engine;
  import isac_pkg::*;
  import tb_dsp_pkg::*;

  localparam int N = isac_pkg::N_FFT;
  localparam int TOL = 24;   // LSBs of the 24-bit word

  logic clk = 1'b0, rst_n = 1'b0;
  logic inverse, in_valid, in_ready, out_valid, out_ready, out_last, busy;
  cplx_t in_data, out_data;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  fft_engine dut (.*);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit inv, input int amp);
    real re[], im[];
    int  xr[], xi[];
    longint t_last_in, t_first_out, cyc;
    int  k, maxerr;
    re = new[N]; im = new[N]; xr = new[N]; xi = new[N];
    for (int i = 0; i < N; i++) begin
      xr[i] = int'($urandom_range(2*amp)) - amp;
      xi[i] = int'($urandom_range(2*amp)) - amp;
      re[i] = real'(xr[i]); im[i] = real'(xi[i]);
    end
    fft_ref(re, im, inv);
    cyc = 0;
    // load
    inverse = inv;
    for (int i = 0; i < N; i++) begin
      in_valid = 1'b1;
      in_data.re = DW'(xr[i]); in_data.im = DW'(xi[i]);
      @(posedge clk); cyc++;
      while (!in_ready) begin @(posedge clk); cyc++; end
      #0.1;
    end
    in_valid = 1'b0;
    t_last_in = cyc;
    // wait for results
    while (!out_valid) begin @(posedge clk); cyc++; #0.1; end
    t_first_out = cyc;
    checks++;
    if (t_first_out - t_last_in != longint'(N / 2 * $clog2(N))) begin
      failures++;
      $display("compute latency %0d, expected %0d", t_first_out - t_last_in, N / 2 * $clog2(N));
    end
    k = 0; maxerr = 0;
    while (k < N) begin
      out_ready = ($urandom_range(3) != 0);
      #0.1;
      if (out_valid && out_ready) begin
        longint er, ei;
        er = longint'(out_data.re) - round_r(re[k] / real'(N));
        ei = longint'(out_data.im) - round_r(im[k] / real'(N));
        if (er < 0) er = -er;
        if (ei < 0) ei = -ei;
        if (int'(er) > maxerr) maxerr = int'(er);
        if (int'(ei) > maxerr) maxerr = int'(ei);
        checks++;
        if (er > TOL || ei > TOL || out_last != (k == N - 1)) begin
          failures++;
          if (failures < 10) $display("bin %0d: got %0d,%0d want %f,%f", k, out_data.re, out_data.im,
                                      re[k] / real'(N), im[k] / real'(N));
        end
        k++;
      end
      @(posedge clk);
      #0.1;
    end
    out_ready = 1'b0;
    $display("%s done, max error %0d LSB", inv ? "IFFT" : "FFT", maxerr);
  endtask

  initial begin
    in_valid = 0; out_ready = 0; inverse = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #0.1;
    run(1'b0, 1 << 22);
    run(1'b1, 1 << 22);
    run(1'b0, 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
