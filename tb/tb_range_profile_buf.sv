// tb_range_profile_buf: streams five random profiles into a small buffer
// (N = 64 bins per profile, 48 stored). Software is modelled slow: it releases
// a bank only some time after it was filled, so the writer must stall on a
// full bank. Checks the stored words (shifted and saturated), the bank
// alternation, the beam tags, the profile count, that no data is lost across
// stalls, and that stall_cycles counted the waits.
`timescale 1ns/1ps
module tb_range_profile_buf;
  import isac_pkg::*;

  localparam int N = 64, BINS = 48, SH = 2, BW = $clog2(BINS);
  localparam int NPROF = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, in_valid, in_ready, in_last, last_bank, wrote;
  cplx_t in_data;
  logic [BW:0] rd_addr;
  iq_t rd_data;
  logic [1:0] ack, full;
  logic [15:0] beam_tag [2];
  logic [31:0] profiles, stall_cycles;
  cplx_t prof [NPROF][N];
  int checks = 0, failures = 0;

  always #1 clk = ~clk;
  range_profile_buf #(.N(N), .BINS(BINS), .OUT_SHIFT(SH)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic signed [15:0] expect_w(input logic signed [23:0] v);
    int s = int'(v) >>> SH;
    if (s > 32767) return 16'sh7FFF;
    if (s < -32768) return 16'sh8000;
    return 16'(s);
  endfunction

  // producer
  initial begin
    in_valid = 0; in_last = 0; in_data = '0; clear = 0;
    for (int p = 0; p < NPROF; p++)
      for (int k = 0; k < N; k++) begin
        prof[p][k].re = (k == 3) ? 24'sh7FFFFF : DW'($urandom_range(400000)) - 24'sd200000;
        prof[p][k].im = (k == 4) ? 24'sh800000 : DW'($urandom_range(400000)) - 24'sd200000;
      end
    wait (rst_n);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int p = 0; p < NPROF; p++)
      for (int k = 0; k < N; k++) begin
        in_valid = 1; in_data = prof[p][k]; in_last = (k == N - 1);
        while (!in_ready) @(negedge clk);
        @(negedge clk);
        in_valid = 0; in_last = 0;
      end
  end

  // consumer (software model)
  initial begin
    ack = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPROF; p++) begin
      int b;
      b = p % 2;
      while (!full[b]) @(negedge clk);
      check(beam_tag[b] == 16'(p), $sformatf("beam tag %0d", p));
      repeat (200) @(negedge clk);          // software is slow
      for (int k = 0; k < BINS; k++) begin
        rd_addr = {1'(b), BW'(k)};
        @(negedge clk); @(negedge clk);
        check(rd_data.re == expect_w(prof[p][k].re) && rd_data.im == expect_w(prof[p][k].im),
              $sformatf("profile %0d bin %0d", p, k));
      end
      ack = 2'(1 << b);
      @(negedge clk) ack = '0;
      @(negedge clk);
    end
    check(profiles == NPROF, "profile count");
    check(stall_cycles > 0, "stall happened");
    check(!in_ready || !in_valid, "idle at end");
    $display("stall cycles %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wrote_n = 0;
  always @(posedge clk) if (rst_n && wrote) wrote_n++;
  final check(wrote_n == NPROF, "wrote pulses");
endmodule
