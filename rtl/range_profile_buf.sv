// range_profile_buf: ping-pong block RAM for finished range profiles.
//
// The published system stores each range profile in a PL block RAM that the processing
// system reads over AXI. This buffer has two banks of BINS words so that the
// next profile can be written while software reads the last one. The IFFT
// output (N bins per profile) streams in; the first BINS bins are stored as
// 16-bit I/Q words (shifted right by OUT_SHIFT and saturated), the rest are
// dropped. A finished bank is marked full and tagged with the beam index it
// belongs to (profiles arrive in beam order, so the tag is the number of
// profiles written since the sweep started). Software releases a bank with ack; if the bank to be written
// next is still full, in_ready goes low and the whole receive pipeline behind
// it stalls until software catches up, so no profile is overwritten unread.
// Banks are used alternately, starting with bank 0 after reset or clear.
//
// Interface: valid/ready input stream with in_last on bin N-1; read port
// {bank, bin} with one cycle of latency; status outputs. Timing: one bin per
// clock when not stalled. Bank count, tagging and the stall are this design's
// own choices.
module range_profile_buf
  import isac_pkg::*;
#(
  parameter int unsigned N         = isac_pkg::N_FFT,
  parameter int unsigned BINS      = isac_pkg::N_FFT,
  parameter int unsigned OUT_SHIFT = 0,
  parameter int unsigned BW        = $clog2(BINS),
  parameter int unsigned BEAM_W    = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,       // restart with bank 0, both banks free
  // range profile in (from the IFFT)
  input  logic              in_valid,
  output logic              in_ready,
  input  cplx_t             in_data,
  input  logic              in_last,
  // processing-system read port
  input  logic [BW:0]       rd_addr,     // {bank, bin}
  output iq_t               rd_data,
  input  logic [1:0]        ack,         // release bank 0 / 1
  // status
  output logic [1:0]        full,
  output logic              last_bank,   // bank written most recently
  output logic [BEAM_W-1:0] beam_tag [2],
  output logic [31:0]       profiles,    // profiles written since clear
  output logic              wrote,       // pulse: a profile was completed
  output logic [31:0]       stall_cycles // cycles with data waiting on a full bank
);

  iq_t ram [2**(BW+1)];   // bank b, bin k at {b, k}

  logic                    wbank;
  logic [$clog2(N)-1:0]    wbin;
  logic                    accept;
  iq_t                     wword;

  assign in_ready = !full[wbank];
  assign accept   = in_valid && in_ready;
  assign wword.re = sat_smp(DW'(in_data.re >>> OUT_SHIFT));
  assign wword.im = sat_smp(DW'(in_data.im >>> OUT_SHIFT));

  always_ff @(posedge clk) begin
    if (accept && 32'(wbin) < BINS) ram[{wbank, BW'(wbin)}] <= wword;
    rd_data <= ram[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank        <= 1'b0;
      wbin         <= '0;
      full         <= '0;
      last_bank    <= 1'b1;
      beam_tag     <= '{default: '0};
      profiles     <= '0;
      wrote        <= 1'b0;
      stall_cycles <= '0;
    end else begin
      wrote <= 1'b0;
      full  <= full & ~ack;
      if (in_valid && !in_ready) stall_cycles <= stall_cycles + 1;
      if (clear) begin
        wbank    <= 1'b0;
        wbin     <= '0;
        full     <= '0;
        profiles <= '0;
      end else if (accept) begin
        if (wbin == '0) beam_tag[wbank] <= BEAM_W'(profiles);
        if (in_last) begin
          wbin        <= '0;
          full[wbank] <= 1'b1;
          last_bank   <= wbank;
          wbank       <= ~wbank;
          profiles    <= profiles + 1;
          wrote       <= 1'b1;
        end else begin
          wbin <= wbin + 1'b1;
        end
      end
    end
  end

endmodule
