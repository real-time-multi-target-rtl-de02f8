// tb_axil_regs: AXI4-Lite master model against the register block, with
// simple memory models behind the read ports. Checks register write/read-back
// and reset values, the command pulses (sweep start, bank release), sticky
// status flags, that memory writes reach the right region with the right word
// index, and the read latency of three cycles from the AR handshake to RVALID.
// The AW and W channels are driven with random skew, and BREADY/RREADY are
// held low for a while, to exercise the handshakes.
`timescale 1ns/1ps
module tb_axil_regs;

  localparam int AW = 18, IDX_W = 13;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [AW-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic tx_wr_en, ref_wr_en, tx_play, sweep_start;
  logic [IDX_W-1:0] mem_waddr, mem_raddr;
  logic [31:0] mem_wdata, tx_rd_data, prof_rd_data, tx_len, cap_delay, settle_cycles;
  logic [15:0] num_beams, beam_tag0, beam_tag1;
  logic [1:0] bank_ack, bank_full;
  logic sweep_busy, sweep_done, last_bank, cap_overrun;
  logic [31:0] profiles, trig_count, stall_cycles;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;
  axil_regs dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // memory models: registered read, contents are a function of the index
  logic [31:0] tx_mem [8192], ref_mem [4096];
  always_ff @(posedge clk) begin
    tx_rd_data   <= tx_mem[mem_raddr];
    prof_rd_data <= {19'h5A5A5, mem_raddr};
    if (tx_wr_en)  tx_mem[mem_waddr] <= mem_wdata;
    if (ref_wr_en) ref_mem[mem_waddr[11:0]] <= mem_wdata;
  end

  // pulse monitors
  int starts = 0;
  logic [1:0] acks_seen = '0;
  always @(posedge clk) if (rst_n) begin
    if (sweep_start) starts++;
    acks_seen |= bank_ack;
  end

  task automatic axi_write(input logic [AW-1:0] a, input logic [31:0] d);
    int skew;
    skew = $urandom_range(2);
    @(negedge clk);
    s_awaddr = a; s_wdata = d;
    if (skew == 1) begin s_awvalid = 1; @(negedge clk); end
    if (skew == 2) begin s_wvalid = 1; @(negedge clk); end
    s_awvalid = 1; s_wvalid = 1;
    #0.1;
    while (!(s_awready && s_wready)) begin @(negedge clk); #0.1; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(3)) @(negedge clk);   // BREADY held low
    check(s_bvalid && s_bresp == 2'b00, "write response");
    s_bready = 1;
    @(negedge clk);
    s_bready = 0;
    check(!s_bvalid, "bvalid dropped");
  endtask

  task automatic axi_read(input logic [AW-1:0] a, output logic [31:0] d);
    int lat;
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    #0.1;
    while (!s_arready) begin @(negedge clk); #0.1; end
    @(negedge clk);
    s_arvalid = 0;
    lat = 1;
    s_rready = 0;
    while (!s_rvalid) begin @(negedge clk); lat++; end
    check(lat == 3, $sformatf("read latency %0d", lat));
    repeat (2) @(negedge clk);      // hold off RREADY
    check(s_rvalid, "rvalid held");
    d = s_rdata;
    s_rready = 1;
    @(negedge clk);
    s_rready = 0;
    check(!s_rvalid, "rvalid dropped");
  endtask

  initial begin
    logic [31:0] d;
    int idx [8];
    logic [31:0] val [8];
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0; s_wstrb = 4'hF;
    sweep_busy = 1; sweep_done = 0; bank_full = 2'b10; last_bank = 1; cap_overrun = 0;
    profiles = 32'd17; beam_tag0 = 16'd4; beam_tag1 = 16'd5; trig_count = 32'd99; stall_cycles = 32'd1234;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values
    axi_read(18'h0000C, d); check(d == 32'd4384, "TX_LEN reset");
    axi_read(18'h00014, d); check(d == 32'd21, "NUM_BEAMS reset");
    axi_read(18'h00018, d); check(d == 32'd256, "SETTLE reset");
    // register writes
    axi_write(18'h00000, 32'h1);      check(tx_play == 1, "tx_play");
    axi_write(18'h0000C, 32'd1000);   check(tx_len == 1000, "tx_len");
    axi_write(18'h00010, 32'd42);     check(cap_delay == 42, "cap_delay");
    axi_write(18'h00014, 32'd441);    check(num_beams == 441, "num_beams");
    axi_write(18'h00018, 32'd7);      check(settle_cycles == 7, "settle");
    axi_read(18'h00000, d); check(d == 1, "CTRL read");
    axi_read(18'h00010, d); check(d == 42, "CAP_DELAY read");
    axi_read(18'h00014, d); check(d == 441, "NUM_BEAMS read");
    // status and counters
    axi_read(18'h0001C, d); check(d == 17, "PROFILES");
    axi_read(18'h00020, d); check(d == 4, "BANK0_BEAM");
    axi_read(18'h00024, d); check(d == 5, "BANK1_BEAM");
    axi_read(18'h00028, d); check(d == 99, "TRIG_COUNT");
    axi_read(18'h0002C, d); check(d == 1234, "STALLS");
    @(negedge clk) sweep_done = 1; cap_overrun = 1;
    @(negedge clk) sweep_done = 0; cap_overrun = 0;
    axi_read(18'h00008, d); check(d == 32'b111011, $sformatf("STATUS %b", d));
    axi_write(18'h00004, 32'h8);      // clear sticky flags
    axi_read(18'h00008, d); check(d == 32'b011001, $sformatf("STATUS cleared %b", d));
    // command pulses
    axi_write(18'h00004, 32'h1);
    axi_write(18'h00004, 32'h6);
    repeat (2) @(negedge clk);
    check(starts == 1, "one sweep start pulse");
    check(acks_seen == 2'b11, "bank ack pulses");
    check(sweep_start == 0 && bank_ack == 0, "pulses end");
    // memory windows
    for (int i = 0; i < 8; i++) begin
      idx[i] = $urandom_range(4095);
      val[i] = $urandom;
      axi_write(18'h10000 | 18'(idx[i] << 2), val[i]);
      axi_write(18'h08000 | 18'(idx[i] << 2), ~val[i]);
    end
    for (int i = 0; i < 8; i++) begin
      axi_read(18'h10000 | 18'(idx[i] << 2), d);
      check(d == val[i] && tx_mem[idx[i]] == val[i], "TX RAM word");
      check(ref_mem[idx[i]] == ~val[i], "REF RAM word");
      axi_read(18'h18000 | 18'(idx[i] << 2), d);
      check(d == {19'h5A5A5, 13'(idx[i])}, "profile RAM word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
