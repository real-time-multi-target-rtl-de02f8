// rx_capture: receive capture window and cyclic-prefix removal.
//
// Takes the ADC I/Q stream and, once armed, cuts one OFDM symbol out of it for
// the demodulating FFT. The window is timed from the transmitter: at the
// sym_start marker of the TX player the block skips `delay` samples (the fixed
// DAC-to-ADC loop latency left after multi-tile synchronization, measured once
// and written by software) and then CP_LEN samples of cyclic prefix, and
// forwards the next N samples, scaled up by IN_SHIFT bits into the internal
// word format. The published system states that the receiver performs OFDM
// demodulation and that MTS fixes the TX/RX delay; the arm/delay mechanism is
// this design's own.
//
// Interface: arm (one-cycle pulse) starts a capture; busy is high from arm
// until the last sample left; done pulses with the last sample. The output is
// a valid/ready stream. The ADC cannot be stalled: a sample that meets
// out_ready low is lost and sets the sticky overrun flag (cleared by arm).
// Timing: outputs are combinational from the ADC inputs (no added latency);
// out_data is the ADC sample shifted left, so synthesis reports those output
// bits as wired straight to inputs or constant, which is intended.
module rx_capture
  import isac_pkg::*;
#(
  parameter int unsigned N      = isac_pkg::N_FFT,
  parameter int unsigned CP     = isac_pkg::CP_LEN,
  parameter int unsigned DLY_W  = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [SMP_W-1:0] adc_i,
  input  logic signed [SMP_W-1:0] adc_q,
  input  logic                    adc_valid,
  input  logic                    sym_start,   // from the TX player
  input  logic                    arm,
  input  logic [DLY_W-1:0]        delay,
  output logic                    busy,
  output logic                    done,
  output logic                    overrun,
  output logic                    out_valid,
  input  logic                    out_ready,
  output cplx_t                   out_data
);

  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_SKIP, S_CAPTURE} state_t;
  state_t state;

  localparam int unsigned SKW = DLY_W + 2;
  logic [SKW-1:0]         skip_cnt, cur_skip;
  logic [$clog2(N+1)-1:0] cap_cnt;
  logic                   in_skip, emit;

  always_comb begin
    in_skip  = (state == S_SKIP) || (state == S_ARMED && sym_start);
    cur_skip = (state == S_ARMED) ? SKW'(delay) + SKW'(CP) : skip_cnt;
    emit     = adc_valid && ((in_skip && cur_skip == '0) || state == S_CAPTURE);
  end

  assign out_valid   = emit;
  assign out_data.re = DW'(adc_i) <<< IN_SHIFT;
  assign out_data.im = DW'(adc_q) <<< IN_SHIFT;
  assign busy        = (state != S_IDLE);
  assign done        = emit && (state == S_CAPTURE) && (cap_cnt == ($clog2(N+1))'(N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      skip_cnt <= '0;
      cap_cnt  <= '0;
      overrun  <= 1'b0;
    end else begin
      if (emit && !out_ready) overrun <= 1'b1;
      unique case (state)
        S_IDLE: if (arm) begin
          state   <= S_ARMED;
          overrun <= 1'b0;
        end
        S_ARMED, S_SKIP: if (in_skip && adc_valid) begin
          if (cur_skip == '0) begin
            state   <= S_CAPTURE;
            cap_cnt <= 1;
          end else begin
            state    <= S_SKIP;
            skip_cnt <= cur_skip - 1'b1;
          end
        end
        S_CAPTURE: if (adc_valid) begin
          cap_cnt <= cap_cnt + 1'b1;
          if (done) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
