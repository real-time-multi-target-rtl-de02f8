// chan_est: per-subcarrier channel estimation against the known PDSCH symbol.
//
// Because the transmitted waveform is known, the channel on subcarrier k is
// estimated as H[k] = Y[k] * W[k], where Y[k] is the demodulated receive bin
// and W[k] a reference weight held in a RAM of N entries. Software fills the
// RAM with W[k] = conj(X[k]) / |X[k]|^2 (scaled to Q1.15) for the transmitted
// symbol X[k], and with zero on the unused guard subcarriers, so that the
// complex multiply here equals a zero-forcing division. The published system names the
// channel estimation step only; the reference-RAM form of the division is
// this design's own choice.
//
// Interface: a reference write port, and a valid/ready stream in and out. The
// input arrives in natural bin order 0 .. N-1 (the bin index is counted here,
// in_last resynchronises it). Timing: one register stage; in_ready is high
// when the output register is empty or being read. The product is shifted
// right by W_FRAC bits and saturated to the internal word width.
module chan_est
  import isac_pkg::*;
#(
  parameter int unsigned N      = isac_pkg::N_FFT,
  parameter int unsigned LOG2N  = $clog2(N),
  parameter int unsigned W_FRAC = 15
) (
  input  logic             clk,
  input  logic             rst_n,
  // reference weight RAM load
  input  logic             ref_wr_en,
  input  logic [LOG2N-1:0] ref_wr_addr,
  input  iq_t              ref_wr_data,
  // demodulated subcarriers in
  input  logic             in_valid,
  output logic             in_ready,
  input  cplx_t            in_data,
  input  logic             in_last,
  // channel estimate out
  output logic             out_valid,
  input  logic             out_ready,
  output cplx_t            out_data,
  output logic             out_last
);

  iq_t ref_ram [N];

  logic [LOG2N-1:0] bin;
  iq_t              w;
  logic signed [DW+SMP_W:0] pr, pi;

  always_ff @(posedge clk) begin
    if (ref_wr_en) ref_ram[ref_wr_addr] <= ref_wr_data;
  end

  always_comb begin
    w  = ref_ram[bin];
    pr = (DW+SMP_W+1)'(in_data.re * w.re) - (DW+SMP_W+1)'(in_data.im * w.im);
    pi = (DW+SMP_W+1)'(in_data.re * w.im) + (DW+SMP_W+1)'(in_data.im * w.re);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid   <= 1'b1;
        out_data.re <= sat_dw(48'(pr >>> W_FRAC));
        out_data.im <= sat_dw(48'(pi >>> W_FRAC));
        out_last    <= in_last;
        bin         <= in_last ? '0 : bin + 1'b1;
      end
    end
  end

endmodule
