// tb_ra_tensor_sweep: acquisition of a full range-angle tensor, 21 transmit
// beams x 21 receive beams = 441 beam pairs, with the design at its defaults.
//
// The software model loads one CP-OFDM QPSK symbol (3300 subcarriers of a
// 4096-point FFT) and its zero-forcing weights, then runs one receive sweep
// per transmit beam. Between sweeps it steps the transmit beam itself, as the
// host does over USB in the real system. For every profile it reads the first
// RBINS range bins, which is what a host interested in the near range would
// fetch, and releases the bank at once, so the PL never waits on software.
//
// The channel has a static self-interference path at range bin 4 and two
// reflectors, each strongest at one (transmit, receive) beam pair and falling
// off with a Gaussian beam pattern around it. The tensor is checked bin by bin
// against a double-precision model of the same processing. For each
// reflector, the strongest cell of the tensor's angle plane at its range bin
// must be at its own beam pair. The PL time for all 441 profiles must come to
// less than 200 ms at a 491.52 MHz sample clock.
`timescale 1ns/1ps
module tb_ra_tensor_sweep;
  import isac_pkg::*;
  import tb_dsp_pkg::*;

  localparam int N = isac_pkg::N_FFT;
  localparam int CP = isac_pkg::CP_LEN;
  localparam int PERIOD = N + CP;
  localparam int NSC = isac_pkg::N_SC;
  localparam int RX_BEAMS = 21;      // receive beams per sweep (register reset value)
  localparam int TX_BEAMS = 21;      // transmit beams, stepped by software
  localparam int RBINS = 128;        // range bins read per profile
  localparam int L0 = 23;            // DAC-to-ADC loop latency, cycles
  localparam real S = 37.0;
  localparam int TOL = 12;
  localparam int NPATH = 3;

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
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  int xq_re [N], xq_im [N];
  int w_re [N], w_im [N];

  // ---------------- channel: (tx beam, rx beam) dependent gains ----------------
  int path_r [NPATH] = '{4, 37, 100};
  int path_tx [NPATH] = '{0, 6, 15};
  int path_rx [NPATH] = '{0, 5, 14};
  function automatic void gain(input int tx, input int rx, input int p, output real gr, output real gi);
    real a, d2;
    d2 = real'((tx - path_tx[p]) * (tx - path_tx[p]) + (rx - path_rx[p]) * (rx - path_rx[p]));
    case (p)
      0: a = 0.10;
      1: a = 0.60 * $exp(-0.5 * d2 / 4.0);
      default: a = 0.45 * $exp(-0.5 * d2 / 6.0);
    endcase
    gr = a * $cos(0.7 * real'(p + 1) + 0.1 * real'(rx) - 0.2 * real'(tx));
    gi = a * $sin(0.7 * real'(p + 1) + 0.1 * real'(rx) - 0.2 * real'(tx));
  endfunction

  function automatic void rx_sample(input int tx, input int rx, input int m, output int yr, output int yi);
    real ar = 0.0, ai = 0.0, gr, gi;
    int  n;
    for (int p = 0; p < NPATH; p++) begin
      gain(tx, rx, p, gr, gi);
      n  = (m - path_r[p] + N) % N;
      ar += gr * real'(xq_re[n]) - gi * real'(xq_im[n]);
      ai += gr * real'(xq_im[n]) + gi * real'(xq_re[n]);
    end
    yr = int'(round_r(ar));
    yi = int'(round_r(ai));
  endfunction

  int   hist_re [512], hist_im [512];
  int   hp = 0, rx_now = 0, tx_now = 0;
  logic trig_q = 1'b0;
  always @(posedge clk) begin
    real ar, ai, gr, gi;
    int  idx;
    hist_re[hp] = int'(dac_i);
    hist_im[hp] = int'(dac_q);
    ar = 0.0; ai = 0.0;
    for (int p = 0; p < NPATH; p++) begin
      gain(tx_now, rx_now, p, gr, gi);
      idx = (hp - (L0 + path_r[p]) + 1 + 512) % 512;
      ar += gr * real'(hist_re[idx]) - gi * real'(hist_im[idx]);
      ai += gr * real'(hist_im[idx]) + gi * real'(hist_re[idx]);
    end
    adc_i <= 16'(round_r(ar));
    adc_q <= 16'(round_r(ai));
    hp = (hp + 1) % 512;
    trig_q <= gpio_beam_trig;
    if (rst_n && gpio_beam_trig && !trig_q) rx_now <= (rx_now + 1) % RX_BEAMS;
  end
  assign adc_valid = 1'b1;

  longint cyc = 0;
  always @(posedge clk) if (rst_n) cyc++;

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

  task automatic ref_profile(input int tx, input int rx, ref real hr[], ref real hi[]);
    int yr, yi;
    real tr, ti;
    hr = new[N]; hi = new[N];
    for (int m = 0; m < N; m++) begin
      rx_sample(tx, rx, m, yr, yi);
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

  // the measured tensor, power per cell
  real tensor [TX_BEAMS][RX_BEAMS][RBINS];

  initial begin
    real xr[], xi[], hr[], hi[];
    logic [31:0] d;
    int kk, b, maxerr, bt, br;
    real best;
    longint t_start, t_end, pl_cycles;
    iq_t word;

    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = '0; s_axi_araddr = '0; s_axi_wdata = '0; s_axi_wstrb = 4'hF;

    xr = new[N]; xi = new[N];
    for (int k = 0; k < N; k++) begin xr[k] = 0.0; xi[k] = 0.0; w_re[k] = 0; w_im[k] = 0; end
    for (int s = -NSC / 2; s < NSC / 2; s++) begin
      kk = (s + N) % N;
      xr[kk] = ($urandom_range(1) == 1) ? 1.0 : -1.0;
      xi[kk] = ($urandom_range(1) == 1) ? 1.0 : -1.0;
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
    for (int n = 0; n < PERIOD; n++) begin
      kk = (n < CP) ? N - CP + n : n - CP;
      word.re = 16'(xq_re[kk]); word.im = 16'(xq_im[kk]);
      axi_write(18'h10000 | 18'(n << 2), word);
    end
    for (int k = 0; k < N; k++) begin
      word.re = 16'(w_re[k]); word.im = 16'(w_im[k]);
      axi_write(18'h08000 | 18'(k << 2), word);
    end
    axi_write(18'h00010, L0);
    axi_write(18'h00000, 32'h1);
    repeat (2 * PERIOD) @(negedge clk);

    maxerr = 0;
    pl_cycles = 0;
    for (int tx = 0; tx < TX_BEAMS; tx++) begin
      tx_now = tx;                          // host steps the transmit beam
      repeat (300) @(negedge clk);          // let the old echoes die out
      t_start = cyc;
      axi_write(18'h00004, 32'h1);          // start a receive sweep
      for (int rx = 0; rx < RX_BEAMS; rx++) begin
        b = rx % 2;
        do axi_read(18'h00008, d); while (!d[2 + b]);
        axi_read(18'h00020 + 18'(b << 2), d);
        check(d == 32'(rx), $sformatf("tx %0d: bank %0d tag %0d, expected %0d", tx, b, d, rx));
        ref_profile(tx, rx, hr, hi);
        for (int n = 0; n < RBINS; n++) begin
          int er, ei;
          axi_read(18'h18000 | 18'(((b << 12) | n) << 2), d);
          word = iq_t'(d);
          er = int'(word.re) - int'(round_r(hr[n]));
          ei = int'(word.im) - int'(round_r(hi[n]));
          if (er < 0) er = -er;
          if (ei < 0) ei = -ei;
          if (er > maxerr) maxerr = er;
          if (ei > maxerr) maxerr = ei;
          checks++;
          if (er > TOL || ei > TOL) begin
            failures++;
            if (failures < 20) $display("tx %0d rx %0d bin %0d: got %0d,%0d want %f,%f",
                                        tx, rx, n, word.re, word.im, hr[n], hi[n]);
          end
          tensor[tx][rx][n] = real'(word.re) * real'(word.re) + real'(word.im) * real'(word.im);
        end
        axi_write(18'h00004, 32'(2 << b));
      end
      do axi_read(18'h00008, d); while (d[0]);
      t_end = cyc;
      pl_cycles += t_end - t_start;
      check(d[1] == 1'b1, "sweep done flag");
    end
    $display("tensor: %0d x %0d beams x %0d bins, max error %0d LSB", TX_BEAMS, RX_BEAMS, RBINS, maxerr);

    // each reflector must peak in the angle plane at its own beam pair
    for (int p = 1; p < NPATH; p++) begin
      best = -1.0; bt = -1; br = -1;
      for (int tx = 0; tx < TX_BEAMS; tx++)
        for (int rx = 0; rx < RX_BEAMS; rx++)
          if (tensor[tx][rx][path_r[p]] > best) begin best = tensor[tx][rx][path_r[p]]; bt = tx; br = rx; end
      $display("reflector %0d: range bin %0d, peak at tx %0d rx %0d, amplitude %0.0f",
               p, path_r[p], bt, br, $sqrt(best));
      check(bt == path_tx[p] && br == path_rx[p], $sformatf("reflector %0d at tx %0d rx %0d", p, bt, br));
    end

    // sweep time of the whole tensor, sweep starts to sweep ends
    begin
      real ms;
      ms = real'(pl_cycles) / 491.52e6 * 1.0e3;
      $display("441 beam pairs: %0d cycles, %0.1f ms at 491.52 MHz", pl_cycles, ms);
      check(ms < 200.0, "full tensor in under 200 ms");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
