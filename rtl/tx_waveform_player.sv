// tx_waveform_player: transmit waveform block RAM and cyclic DAC streamer.
//
// The processing system writes the baseband PDSCH IQ samples (generated
// offline) into this RAM through the register interface; the published system loads the
// waveform into a PL block RAM over AXI and streams it out through two DACs,
// which is what this block does. When play is high the RAM is read at one
// sample per clock from address 0 to len-1 and then again from 0, so the
// waveform repeats without gaps. The I and Q parts drive the two DACs.
//
// Interface: a write port (wr_en/wr_addr/wr_data, one 32-bit IQ word per
// write), a read-back port with one cycle of latency, the play enable and the
// length register, and the DAC stream. sym_start is high together with the DAC
// sample taken from address 0, i.e. the first sample of the cyclic prefix of
// the first OFDM symbol; the receiver times its capture window from it.
// Timing: the DAC outputs are registered and lag the read address by one
// clock (synchronous block RAM read). While play is low the DACs get zeros.
// Depth, the one-sample-per-clock stream and the cyclic playback are this
// design's choices; the published system gives no RAM size.
module tx_waveform_player
  import isac_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // waveform load from the processing system
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  iq_t           wr_data,
  input  logic [AW-1:0] rd_addr,
  output iq_t           rd_data,
  // playback control
  input  logic          play,
  input  logic [AW:0]   len,        // samples in one period, 1 .. DEPTH
  // DAC stream
  output logic signed [SMP_W-1:0] dac_i,
  output logic signed [SMP_W-1:0] dac_q,
  output logic          dac_valid,
  output logic          sym_start
);

  iq_t ram [DEPTH];

  logic [AW-1:0] rd_ptr;
  logic          play_q;
  iq_t           ram_q;
  logic          first_q;

  always_ff @(posedge clk) begin
    if (wr_en) ram[wr_addr] <= wr_data;
    ram_q   <= ram[rd_ptr];
    rd_data <= ram[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr  <= '0;
      play_q  <= 1'b0;
      first_q <= 1'b0;
    end else begin
      play_q  <= play;
      first_q <= play && (rd_ptr == '0);
      if (!play || (AW+1)'(rd_ptr) + 1'b1 >= len) rd_ptr <= '0;
      else                                        rd_ptr <= rd_ptr + 1'b1;
    end
  end

  assign dac_valid = play_q;
  assign dac_i     = play_q ? ram_q.re : '0;
  assign dac_q     = play_q ? ram_q.im : '0;
  assign sym_start = play_q && first_q;

endmodule
