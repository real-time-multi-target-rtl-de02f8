// tb_rx_capture: drives an ADC stream whose sample value is its position
// after the TX symbol marker, so that the captured window can be read off the
// data. Checks for several loop delays that exactly N samples starting at
// delay + CP are forwarded in order, that done pulses on the last one, that
// busy frames the capture, and that a stalled output sets overrun.
`timescale 1ns/1ps
module tb_rx_capture;
  import isac_pkg::*;

  localparam int N = isac_pkg::N_FFT;
  localparam int CP = isac_pkg::CP_LEN;
  localparam int PERIOD = N + CP;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [SMP_W-1:0] adc_i, adc_q;
  logic adc_valid, sym_start, arm, busy, done, overrun, out_valid, out_ready;
  logic [15:0] delay;
  cplx_t out_data;
  int checks = 0, failures = 0;
  int pos = 0;   // position in the TX period

  always #1 clk = ~clk;
  rx_capture dut (.*);

  // ADC: sample value = position in the period, Q = its negative
  always_ff @(posedge clk) pos <= (pos + 1) % PERIOD;
  assign sym_start = (pos == 0);
  assign adc_valid = 1'b1;
  assign adc_i = SMP_W'(pos);
  assign adc_q = -SMP_W'(pos);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic capture(input int d, input bit stall);
    int got = 0, first = -1;
    bit saw_done = 0;
    delay = 16'(d);
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
    check(busy, "busy after arm");
    while (busy) begin
      out_ready = !(stall && got == 100);
      if (out_valid) begin
        int v = int'(out_data.re >>> IN_SHIFT);
        if (first < 0) first = v;
        check(v == (d + CP + got) % PERIOD && out_data.im == -out_data.re,
              $sformatf("delay %0d sample %0d value %0d", d, got, v));
        if (done) begin saw_done = 1; check(got == N - 1, "done on last sample"); end
        got++;
      end
      @(negedge clk);
    end
    check(got == N, $sformatf("count %0d", got));
    check(saw_done, "done seen");
    check(overrun == stall, "overrun flag");
  endtask

  initial begin
    arm = 0; out_ready = 1; delay = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    capture(0, 0);
    capture(37, 0);
    capture(300, 0);
    capture(5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
