// tb_tx_waveform_player: loads random IQ words, plays a period shorter than
// the RAM and checks that the DAC stream repeats RAM[0..len-1] one sample per
// clock without gaps, that sym_start marks every sample from address 0, that
// the DACs are silent when play is low, and the read-back port.
`timescale 1ns/1ps
module tb_tx_waveform_player;
  import isac_pkg::*;

  localparam int DEPTH = 8192;
  localparam int AW = $clog2(DEPTH);
  localparam int LEN = 4384;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en, play, dac_valid, sym_start;
  logic [AW-1:0] wr_addr, rd_addr;
  iq_t wr_data, rd_data;
  logic [AW:0] len;
  logic signed [SMP_W-1:0] dac_i, dac_q;
  iq_t model [DEPTH];
  int checks = 0, failures = 0;

  always #1 clk = ~clk;
  tx_waveform_player dut (.*);

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

  initial begin
    int idx, periods;
    wr_en = 0; play = 0; wr_addr = '0; rd_addr = '0; wr_data = '0; len = LEN;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = iq_t'($urandom);
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_data = model[i];
    end
    @(negedge clk) wr_en = 0;
    // read back a few words
    for (int i = 0; i < 50; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      rd_addr = AW'(a);
      @(negedge clk); @(negedge clk);
      check(rd_data == model[a], "read back");
    end
    // idle: silent
    repeat (5) begin @(negedge clk); check(dac_valid == 0 && dac_i == 0 && dac_q == 0, "idle silent"); end
    play = 1;
    // wait for first sym_start, then follow three periods
    while (!sym_start) @(negedge clk);
    idx = 0; periods = 0;
    while (periods < 3) begin
      check(dac_valid && dac_i == model[idx].re && dac_q == model[idx].im, $sformatf("sample %0d", idx));
      check(sym_start == (idx == 0), "sym_start position");
      idx++;
      if (idx == LEN) begin idx = 0; periods++; end
      @(negedge clk);
    end
    play = 0;
    repeat (2) @(negedge clk);
    check(dac_valid == 0 && dac_i == 0, "silent after stop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
