// tb_isac_sensing_top: one complete receive-beam sweep of the whole design at
// its default size (4096-point FFT, 288-sample CP, 21 receive beams).
//
// Software model: builds one CP-OFDM symbol with random QPSK on the 3300
// active subcarriers of a 275-RB carrier, loads it into the transmit RAM and
// the matching zero-forcing weights conj(X)/|X|^2 into the reference RAM over
// AXI4-Lite, sets the loop delay, starts playback and a sweep, then reads
// every range profile over AXI as its bank fills and releases the bank. It
// holds back the first profiles on purpose so that the receive pipeline has
// to stall on full banks.
//
// Channel model: the ADC sees the DAC stream delayed by the loop latency plus
// the round-trip delay of each reflector, each with a complex gain that
// depends on the current receive beam (counted from the GPIO rising edges):
// a static self-interference path at range bin 4 and two targets at range
// bins 37 and 100 whose gains peak at different beams, as two reflectors at
// two angles would.
//
// Checks: every bin of every profile against a double-precision model of the
// same processing (FFT/N, times W, IFFT/N) within a small tolerance; that the
// strongest bin of each beam is where the channel puts it; the beam tag of
// each bank; the sweep-done interrupt; one GPIO edge per beam; and that the
// per-beam time allows a sweep of 441 beam pairs in under 200 ms at a
// 491.52 MHz sample clock. Each mechanism (capture, trigger, stall on a full
// bank, use of both banks, sweep done) must occur at least once.
`timescale 1ns/1ps
module tb_isac_sensing_top;
  import isac_pkg::*;
  import tb_dsp_pkg::*;

  localparam int N = isac_pkg::N_FFT;
  localparam int CP = isac_pkg::CP_LEN;
  localparam int PERIOD = N + CP;
  localparam int NSC = isac_pkg::N_SC;
  localparam int BEAMS = 21;         // register reset value of the design
  localparam int L0 = 23;            // DAC-to-ADC loop latency, cycles
  localparam real S = 37.0;          // time-domain scale of the TX symbol
  localparam int TOL = 12;           // LSBs per profile bin
  localparam int NPATH = 3;
  localparam int HOLD = 150000;      // cycles software waits before the first read

  logic clk = 1'b0, rst_n = 1'b0;
  logic [17:0] s_axi_awaddr, s_axi_araddr;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [31:0] s_axi_wdata, s_axi_rdata;
  logic [3:0] s_axi_wstrb;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic signed [15:0] dac_i, dac_q, adc_i, adc_q;
  logic dac_valid, adc_valid, gpio_beam_trig, irq_sweep_done;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;
  isac_sensing_top dut (.*);

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- transmit symbol ----------------
  int   xq_re [N], xq_im [N];      // quantised time-domain symbol (no CP)
  int   w_re [N], w_im [N];        // reference weights, Q1.15

  // ---------------- channel ----------------
  int   path_r [NPATH] = '{4, 37, 100};
  function automatic void gain(input int beam, input int p, output real gr, output real gi);
    real a;
    case (p)
      0: a = 0.15;                                                     // self-interference
      1: a = 0.60 * $exp(-0.5 * real'((beam - 5) * (beam - 5)) / 4.0); // target 1
      default: a = 0.45 * $exp(-0.5 * real'((beam - 14) * (beam - 14)) / 6.0); // target 2
    endcase
    gr = a * $cos(0.7 * real'(p + 1) + 0.1 * real'(beam));
    gi = a * $sin(0.7 * real'(p + 1) + 0.1 * real'(beam));
  endfunction

  // received sample m of the symbol seen on beam b (after CP removal)
  function automatic void rx_sample(input int b, input int m, output int yr, output int yi);
    real ar = 0.0, ai = 0.0, gr, gi;
    int  n;
    for (int p = 0; p < NPATH; p++) begin
      gain(b, p, gr, gi);
      n  = (m - path_r[p] + N) % N;
      ar += gr * real'(xq_re[n]) - gi * real'(xq_im[n]);
      ai += gr * real'(xq_im[n]) + gi * real'(xq_re[n]);
    end
    yr = int'(round_r(ar));
    yi = int'(round_r(ai));
  endfunction

  // ADC driver: delay line of the DAC stream, gains of the current beam
  int   hist_re [512], hist_im [512];
  int   hp = 0, beam_now = 0;
  logic trig_q = 1'b0;
  always @(posedge clk) begin
    real ar, ai, gr, gi;
    int  idx;
    hist_re[hp] = int'(dac_i);
    hist_im[hp] = int'(dac_q);
    ar = 0.0; ai = 0.0;
    for (int p = 0; p < NPATH; p++) begin
      gain(beam_now, p, gr, gi);
      idx = (hp - (L0 + path_r[p]) + 1 + 512) % 512;
      ar += gr * real'(hist_re[idx]) - gi * real'(hist_im[idx]);
      ai += gr * real'(hist_im[idx]) + gi * real'(hist_re[idx]);
    end
    adc_i <= 16'(round_r(ar));
    adc_q <= 16'(round_r(ai));
    hp = (hp + 1) % 512;
    trig_q <= gpio_beam_trig;
    if (rst_n && gpio_beam_trig && !trig_q) beam_now <= (beam_now + 1) % BEAMS;
  end
  assign adc_valid = 1'b1;

  // ---------------- mechanism monitors ----------------
  int n_capture = 0, n_trigger = 0, n_irq = 0;
  longint cyc = 0, t_arm [$];
  bit banks_used [2] = '{0, 0};
  always @(posedge clk) if (rst_n) begin
    cyc++;
    // a trigger follows every capture, so its rising edges time the captures
    if (gpio_beam_trig && !trig_q) begin n_trigger++; n_capture++; t_arm.push_back(cyc); end
    if (irq_sweep_done) n_irq++;
  end

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_write(input logic [17:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axi_awaddr = a; s_axi_wdata = d; s_axi_awvalid = 1; s_axi_wvalid = 1; s_axi_bready = 1;
    #0.1;
    while (!s_axi_awready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    while (!s_axi_bvalid) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic axi_read(input logic [17:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = a; s_axi_arvalid = 1; s_axi_rready = 1;
    #0.1;
    while (!s_axi_arready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    @(negedge clk);
  endtask

  // ---------------- reference profile of one beam ----------------
  task automatic ref_profile(input int b, ref real hr[], ref real hi[]);
    int yr, yi;
    real tr, ti;
    hr = new[N]; hi = new[N];
    for (int m = 0; m < N; m++) begin
      rx_sample(b, m, yr, yi);
      hr[m] = real'(yr) * real'(1 << IN_SHIFT);
      hi[m] = real'(yi) * real'(1 << IN_SHIFT);
    end
    fft_ref(hr, hi, 1'b0);
    for (int k = 0; k < N; k++) begin
      tr = hr[k] / real'(N); ti = hi[k] / real'(N);
      hr[k] = (tr * real'(w_re[k]) - ti * real'(w_im[k])) / 32768.0;
      hi[k] = (tr * real'(w_im[k]) + ti * real'(w_re[k])) / 32768.0;
    end
    fft_ref(hr, hi, 1'b1);
    for (int n = 0; n < N; n++) begin hr[n] /= real'(N); hi[n] /= real'(N); end
  endtask

  initial begin
    real xr[], xi[], hr[], hi[];
    logic [31:0] d;
    int maxerr, peak_bin, kk, b;
    real peak_pow, pw, g1r, g1i, g2r, g2i, g0r, g0i;
    longint t_first_done, t_done;
    iq_t word;

    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = '0; s_axi_araddr = '0; s_axi_wdata = '0; s_axi_wstrb = 4'hF;

    // QPSK on 3300 subcarriers centred on DC, IFFT, scale, quantise
    xr = new[N]; xi = new[N];
    for (int k = 0; k < N; k++) begin xr[k] = 0.0; xi[k] = 0.0; w_re[k] = 0; w_im[k] = 0; end
    for (int s = -NSC / 2; s < NSC / 2; s++) begin
      kk = (s + N) % N;
      xr[kk] = ($urandom_range(1) == 1) ? 1.0 : -1.0;
      xi[kk] = ($urandom_range(1) == 1) ? 1.0 : -1.0;
      // conj(X)/|X|^2 = (xr - j xi)/2 in Q1.15
      w_re[kk] = int'(round_r(32767.0 * xr[kk] / 2.0));
      w_im[kk] = int'(round_r(-32767.0 * xi[kk] / 2.0));
    end
    fft_ref(xr, xi, 1'b1);
    for (int n = 0; n < N; n++) begin
      xq_re[n] = int'(round_r(S * xr[n]));
      xq_im[n] = int'(round_r(S * xi[n]));
    end

    repeat (3) @(posedge clk);
    rst_n = 1;

    // load the transmit RAM (CP first) and the reference RAM
    for (int n = 0; n < PERIOD; n++) begin
      kk = (n < CP) ? N - CP + n : n - CP;
      word.re = 16'(xq_re[kk]); word.im = 16'(xq_im[kk]);
      axi_write(18'h10000 | 18'(n << 2), word);
    end
    for (int k = 0; k < N; k++) begin
      word.re = 16'(w_re[k]); word.im = 16'(w_im[k]);
      axi_write(18'h08000 | 18'(k << 2), word);
    end
    axi_read(18'h10000 | 18'(100 << 2), d);
    check(d == {16'(xq_im[100 - CP + N]), 16'(xq_re[100 - CP + N])}, "TX RAM read-back");
    axi_write(18'h00010, L0);        // loop delay
    axi_write(18'h00000, 32'h1);     // play
    repeat (2 * PERIOD) @(negedge clk);
    axi_write(18'h00004, 32'h1);     // start sweep

    repeat (HOLD) @(negedge clk);    // slow software: pipeline has to stall
    t_first_done = 0;
    for (int p = 0; p < BEAMS; p++) begin
      b = p % 2;
      do axi_read(18'h00008, d); while (!d[2 + b]);
      banks_used[b] = 1'b1;
      if (p == 0) t_first_done = cyc;
      axi_read(18'h00020 + 18'(b << 2), d);
      check(d == 32'(p), $sformatf("bank %0d beam tag %0d, expected %0d", b, d, p));
      ref_profile(p, hr, hi);
      maxerr = 0; peak_bin = -1; peak_pow = -1.0;
      for (int n = 0; n < N; n++) begin
        int er, ei, er0, ei0;
        axi_read(18'h18000 | 18'(((b << 12) | n) << 2), d);
        word = iq_t'(d);
        er0 = int'(round_r(hr[n])); ei0 = int'(round_r(hi[n]));
        if (er0 > 32767) er0 = 32767; if (er0 < -32768) er0 = -32768;
        if (ei0 > 32767) ei0 = 32767; if (ei0 < -32768) ei0 = -32768;
        er = int'(word.re) - er0; ei = int'(word.im) - ei0;
        if (er < 0) er = -er;
        if (ei < 0) ei = -ei;
        if (er > maxerr) maxerr = er;
        if (ei > maxerr) maxerr = ei;
        checks++;
        if (er > TOL || ei > TOL) begin
          failures++;
          if (failures < 20) $display("beam %0d bin %0d: got %0d,%0d want %f,%f", p, n, word.re, word.im, hr[n], hi[n]);
        end
        pw = real'(word.re) * real'(word.re) + real'(word.im) * real'(word.im);
        if (pw > peak_pow) begin peak_pow = pw; peak_bin = n; end
      end
      // where the strongest echo of this beam must be
      gain(p, 0, g0r, g0i); gain(p, 1, g1r, g1i); gain(p, 2, g2r, g2i);
      begin
        real a0, a1, a2;
        int want;
        a0 = g0r * g0r + g0i * g0i; a1 = g1r * g1r + g1i * g1i; a2 = g2r * g2r + g2i * g2i;
        want = (a1 >= a0 && a1 >= a2) ? path_r[1] : (a2 >= a0 ? path_r[2] : path_r[0]);
        check(peak_bin == want, $sformatf("beam %0d peak at bin %0d, expected %0d", p, peak_bin, want));
        $display("beam %2d: peak bin %3d amplitude %6.0f, max error %0d LSB", p, peak_bin, $sqrt(peak_pow), maxerr);
      end
      axi_write(18'h00004, 32'(2 << b));   // release the bank
    end
    // sweep end
    t_done = cyc;
    repeat (20) @(negedge clk);
    axi_read(18'h00008, d);
    check(d[1] == 1'b1 && d[0] == 1'b0, "sweep done, not busy");
    axi_read(18'h0001C, d);
    check(d == BEAMS, "profile count");
    axi_read(18'h00028, d);
    check(d == BEAMS && n_trigger == BEAMS, $sformatf("trigger count %0d / %0d", d, n_trigger));
    axi_read(18'h0002C, d);
    $display("stall cycles %0d", d);
    check(d > 0, "back-pressure stall occurred");

    // throughput: time per beam before the first stall (software not yet involved)
    begin
      longint per_beam;
      real sweep_ms;
      per_beam = (t_arm[3] - t_arm[1]) / 2;
      sweep_ms = real'(per_beam) * 441.0 / 491.52e6 * 1.0e3;
      $display("cycles per beam %0d, 441-beam sweep %0.1f ms at 491.52 MHz", per_beam, sweep_ms);
      check(sweep_ms < 200.0, "sweep of 441 beams under 200 ms");
    end

    $display("mechanisms: captures %0d, triggers %0d, sweep-done %0d, banks %0d/%0d",
             n_capture, n_trigger, n_irq, banks_used[0], banks_used[1]);
    check(n_capture == BEAMS, "one capture per beam");
    check(n_irq == 1, "one sweep-done interrupt");
    check(banks_used[0] && banks_used[1], "both banks used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
