// tb_beam_sweep_ctrl: runs two sweeps against a model of the receive chain
// (capture takes a fixed time, the FFT is busy for a while after each
// capture, profiles appear after a processing delay). Checks one capture and
// one GPIO rising edge per beam, the trigger width, that no capture starts
// before the settle time has passed after a trigger, that no capture starts
// while the FFT is busy, and that done comes only after the last profile.
`timescale 1ns/1ps
module tb_beam_sweep_ctrl;

  localparam int TRIG_W = 16, BEAMS = 7, SETTLE = 300, CAPLEN = 100, FFTBUSY = 100, PROC = 900;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, arm, cap_busy, cap_done, fft_ready, clear_out, gpio_trig, busy, done;
  logic [15:0] num_beams, beam;
  logic [31:0] settle_cycles, profiles, trig_count;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;
  beam_sweep_ctrl #(.TRIG_W(TRIG_W)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // receive chain model
  int cap_t = 0, fft_t = 0, arms = 0, rises = 0, hi_len = 0;
  longint now = 0, last_rise = -100000;
  int proc_q [$];
  logic trig_q = 0;
  assign cap_busy  = cap_t != 0;
  assign cap_done  = cap_t == 1;
  assign fft_ready = fft_t == 0 && cap_t == 0;
  always @(posedge clk) if (rst_n) begin
    now++;
    if (cap_t > 0) begin
      cap_t <= cap_t - 1;
      if (cap_t == 1) begin fft_t <= FFTBUSY; proc_q.push_back(int'(now) + PROC); end
    end
    if (fft_t > 0) fft_t <= fft_t - 1;
    if (arm) begin
      checks++;
      if (now - last_rise < SETTLE || fft_t != 0 || cap_t != 0) begin
        failures++; $display("FAIL: capture armed too early at %0d", now);
      end
      cap_t <= CAPLEN; arms++;
    end
    if (proc_q.size() > 0 && proc_q[0] <= now) begin void'(proc_q.pop_front()); profiles <= profiles + 1; end
    if (clear_out) profiles <= 0;
    trig_q <= gpio_trig;
    if (gpio_trig && !trig_q) begin rises++; last_rise = now; hi_len = 1; end
    else if (gpio_trig) hi_len++;
    if (!gpio_trig && trig_q) begin
      checks++;
      if (hi_len != TRIG_W) begin failures++; $display("FAIL: trigger width %0d", hi_len); end
    end
  end

  task automatic sweep(input int nb);
    int a0 = arms, r0 = rises;
    num_beams = 16'(nb);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check(busy, "busy");
    while (!done) begin
      @(negedge clk);
      if (done) check(profiles == 32'(nb), "done after last profile");
    end
    check(arms - a0 == nb, $sformatf("captures %0d", arms - a0));
    repeat (TRIG_W + 2) @(negedge clk);
    check(rises - r0 == nb, $sformatf("trigger edges %0d", rises - r0));
    check(trig_count == 32'(rises), "trigger counter");
    check(!busy, "idle");
  endtask

  initial begin
    start = 0; num_beams = BEAMS; settle_cycles = SETTLE; profiles = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    sweep(BEAMS);
    sweep(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
