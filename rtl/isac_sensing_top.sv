// isac_sensing_top: PL part of the mmWave OFDM sensing transceiver.
//
// One OFDM symbol of a 5G NR PDSCH waveform (400 MHz, 120 kHz subcarrier
// spacing) is played cyclically from a block RAM to the I/Q DACs; the echo
// returns through the receive beamformer to the ADCs. For every receive beam
// the PL cuts one symbol out of the ADC stream, demodulates it with an FFT,
// divides out the known transmitted subcarriers (channel estimation) and
// transforms the channel estimate back with an IFFT. The result is the range
// profile of that beam direction, which is stored in a block RAM for the
// processing system. A GPIO line steps the receive beamformer to the next
// direction after each capture. Stacking the profiles of all beams gives the
// range-angle tensor that host software uses for detection and tracking.
//
//   dac_i/q <- tx_waveform_player <-----------------+
//                    | sym_start                    |
//   adc_i/q -> rx_capture -> fft_engine (FFT) -> chan_est -> fft_engine (IFFT)
//                    ^                                          |
//            beam_sweep_ctrl -> gpio_beam_trig     range_profile_buf
//                    ^                                          |
//   AXI4-Lite <-> axil_regs <-------------------------------------+
//
// Ports: an AXI4-Lite slave for the processing system (see axil_regs for the
// map), the DAC and ADC sample streams of the RF data converters (one complex
// sample per clock, all in one clock domain), the GPIO trigger to the receive
// beamformer and a sweep-done interrupt. The chain order follows the published system;
// the single clock domain, the sample-per-clock rate and the ping-pong profile
// RAM with back-pressure are this design's choices.
module isac_sensing_top
  import isac_pkg::*;
#(
  parameter int unsigned N         = isac_pkg::N_FFT,
  parameter int unsigned CP        = isac_pkg::CP_LEN,
  parameter int unsigned TX_DEPTH  = 8192,
  parameter int unsigned BINS      = isac_pkg::N_FFT,
  parameter int unsigned TRIG_W    = 16,
  parameter int unsigned RST_BEAMS = 21,
  parameter int unsigned RST_SETTLE = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave (from the processing system)
  input  logic [17:0] s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [17:0] s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // RF data converters
  output logic signed [SMP_W-1:0] dac_i,
  output logic signed [SMP_W-1:0] dac_q,
  output logic        dac_valid,
  input  logic signed [SMP_W-1:0] adc_i,
  input  logic signed [SMP_W-1:0] adc_q,
  input  logic        adc_valid,
  // receive beamformer and processing system
  output logic        gpio_beam_trig,
  output logic        irq_sweep_done
);

  localparam int unsigned LOG2N = $clog2(N);
  localparam int unsigned TX_AW = $clog2(TX_DEPTH);
  localparam int unsigned BW    = $clog2(BINS);
  localparam int unsigned IDX_W = 13;
  localparam int unsigned BEAM_W = 16;

  // register interface
  logic              tx_wr_en, ref_wr_en;
  logic [IDX_W-1:0]  mem_waddr, mem_raddr;
  logic [31:0]       mem_wdata, tx_len, cap_delay, settle_cycles;
  logic              tx_play, sweep_start;
  logic [1:0]        bank_ack;
  logic [BEAM_W-1:0] num_beams;
  iq_t               tx_rd_data, prof_rd_data;

  // receive chain
  logic        sym_start;
  logic        cap_arm, cap_busy, cap_done, cap_overrun;
  logic        cap_valid, cap_ready;
  cplx_t       cap_data;
  logic        fwd_valid, fwd_ready, fwd_last;
  cplx_t       fwd_data;
  logic        ce_valid, ce_ready, ce_last;
  cplx_t       ce_data;
  logic        inv_valid, inv_ready, inv_last;
  cplx_t       inv_data;
  logic        fwd_busy, inv_busy;

  // profile buffer and sweep
  logic [1:0]        bank_full;
  logic              last_bank, prof_wrote, prof_clear;
  logic [BEAM_W-1:0] beam_tag [2];
  logic [31:0]       profiles, stall_cycles, trig_count;
  logic              sweep_busy, sweep_done;
  logic [BEAM_W-1:0] cur_beam;

  axil_regs #(
    .IDX_W(IDX_W), .BEAM_W(BEAM_W),
    .RST_TX_LEN(32'(N + CP)), .RST_BEAMS(32'(RST_BEAMS)), .RST_SETTLE(32'(RST_SETTLE))
  ) u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axi_awaddr), .s_awvalid(s_axi_awvalid), .s_awready(s_axi_awready),
    .s_wdata(s_axi_wdata), .s_wstrb(s_axi_wstrb), .s_wvalid(s_axi_wvalid), .s_wready(s_axi_wready),
    .s_bresp(s_axi_bresp), .s_bvalid(s_axi_bvalid), .s_bready(s_axi_bready),
    .s_araddr(s_axi_araddr), .s_arvalid(s_axi_arvalid), .s_arready(s_axi_arready),
    .s_rdata(s_axi_rdata), .s_rresp(s_axi_rresp), .s_rvalid(s_axi_rvalid), .s_rready(s_axi_rready),
    .tx_wr_en, .ref_wr_en, .mem_waddr, .mem_wdata, .mem_raddr,
    .tx_rd_data(tx_rd_data), .prof_rd_data(prof_rd_data),
    .tx_play, .tx_len, .cap_delay, .num_beams, .settle_cycles, .sweep_start, .bank_ack,
    .sweep_busy, .sweep_done, .bank_full, .last_bank, .cap_overrun, .profiles,
    .beam_tag0(beam_tag[0]), .beam_tag1(beam_tag[1]), .trig_count, .stall_cycles
  );

  tx_waveform_player #(.DEPTH(TX_DEPTH)) u_tx (
    .clk, .rst_n,
    .wr_en(tx_wr_en), .wr_addr(TX_AW'(mem_waddr)), .wr_data(iq_t'(mem_wdata)),
    .rd_addr(TX_AW'(mem_raddr)), .rd_data(tx_rd_data),
    .play(tx_play), .len((TX_AW+1)'(tx_len)),
    .dac_i, .dac_q, .dac_valid, .sym_start
  );

  rx_capture #(.N(N), .CP(CP), .DLY_W(16)) u_cap (
    .clk, .rst_n, .adc_i, .adc_q, .adc_valid, .sym_start,
    .arm(cap_arm), .delay(cap_delay[15:0]),
    .busy(cap_busy), .done(cap_done), .overrun(cap_overrun),
    .out_valid(cap_valid), .out_ready(cap_ready), .out_data(cap_data)
  );

  // OFDM demodulation
  fft_engine #(.N(N)) u_fft (
    .clk, .rst_n, .inverse(1'b0),
    .in_valid(cap_valid), .in_ready(cap_ready), .in_data(cap_data),
    .out_valid(fwd_valid), .out_ready(fwd_ready), .out_data(fwd_data), .out_last(fwd_last),
    .busy(fwd_busy)
  );

  chan_est #(.N(N)) u_ce (
    .clk, .rst_n,
    .ref_wr_en, .ref_wr_addr(LOG2N'(mem_waddr)), .ref_wr_data(iq_t'(mem_wdata)),
    .in_valid(fwd_valid), .in_ready(fwd_ready), .in_data(fwd_data), .in_last(fwd_last),
    .out_valid(ce_valid), .out_ready(ce_ready), .out_data(ce_data), .out_last(ce_last)
  );

  // range IFFT
  fft_engine #(.N(N)) u_ifft (
    .clk, .rst_n, .inverse(1'b1),
    .in_valid(ce_valid), .in_ready(ce_ready), .in_data(ce_data),
    .out_valid(inv_valid), .out_ready(inv_ready), .out_data(inv_data), .out_last(inv_last),
    .busy(inv_busy)
  );

  range_profile_buf #(.N(N), .BINS(BINS), .BEAM_W(BEAM_W)) u_prof (
    .clk, .rst_n, .clear(prof_clear),
    .in_valid(inv_valid), .in_ready(inv_ready), .in_data(inv_data), .in_last(inv_last),
    .rd_addr((BW+1)'({mem_raddr[IDX_W-1], mem_raddr[BW-1:0]})), .rd_data(prof_rd_data),
    .ack(bank_ack), .full(bank_full), .last_bank, .beam_tag,
    .profiles, .wrote(prof_wrote), .stall_cycles
  );

  beam_sweep_ctrl #(.TRIG_W(TRIG_W), .BEAM_W(BEAM_W)) u_sweep (
    .clk, .rst_n, .start(sweep_start), .num_beams, .settle_cycles,
    .arm(cap_arm), .cap_busy, .cap_done, .fft_ready(cap_ready), .profiles,
    .clear_out(prof_clear), .gpio_trig(gpio_beam_trig),
    .busy(sweep_busy), .done(sweep_done), .beam(cur_beam), .trig_count
  );

  assign irq_sweep_done = sweep_done;

  logic unused;
  assign unused = ^{ce_last, fwd_busy, inv_busy, prof_wrote, cur_beam, cap_delay[31:16],
                    mem_raddr, tx_len};

endmodule
