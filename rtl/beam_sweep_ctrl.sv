// beam_sweep_ctrl: receive-beam sweep sequencer and GPIO beam trigger.
//
// The receive beamformer holds a list of beam directions and moves to the
// next one on every rising edge of a GPIO line driven by the PL; one range
// profile is acquired per beam. This controller runs one sweep over
// num_beams receive beams: for each beam it waits until the previous trigger
// has settled and the demodulating FFT can take a new symbol, arms the capture,
// and as soon as the symbol has been captured raises the GPIO trigger for
// TRIG_W cycles (the rising edge steps the beam) and starts the settle timer,
// so that beam settling overlaps the FFT/IFFT processing of the profile just
// captured. A trigger follows every capture, the last one included, so that
// the beamformer is back at its first direction when the sweep ends. The
// sweep ends when all num_beams profiles have been written to the profile
// buffer. The transmit beam is not stepped here (it is set by the host over
// USB between sweeps).
//
// Interface: start (pulse) begins a sweep, clear_out pulses with it to reset
// the profile buffer; arm/cap_busy/cap_done talk to rx_capture, fft_ready is
// the in_ready of the demodulating FFT, profiles is the profile buffer's
// count. busy is high during a sweep, done pulses at its end, beam is the
// receive beam now being captured, trig_count counts GPIO rising edges.
// Trigger width, settle time and the overlap are this design's choices.
module beam_sweep_ctrl #(
  parameter int unsigned TRIG_W = 16,   // GPIO high time, cycles
  parameter int unsigned BEAM_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [BEAM_W-1:0] num_beams,
  input  logic [31:0]       settle_cycles,
  // receive chain handshake
  output logic              arm,
  input  logic              cap_busy,
  input  logic              cap_done,
  input  logic              fft_ready,
  input  logic [31:0]       profiles,
  output logic              clear_out,
  // beamformer GPIO
  output logic              gpio_trig,
  // status
  output logic              busy,
  output logic              done,
  output logic [BEAM_W-1:0] beam,
  output logic [31:0]       trig_count
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_CAPTURE, S_DRAIN} state_t;
  state_t state;

  logic [31:0]               settle;
  logic [$clog2(TRIG_W+1):0] trig_cnt;

  assign busy      = (state != S_IDLE);
  assign gpio_trig = (trig_cnt != '0);
  assign clear_out = (state == S_IDLE) && start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      settle     <= '0;
      trig_cnt   <= '0;
      beam       <= '0;
      arm        <= 1'b0;
      done       <= 1'b0;
      trig_count <= '0;
    end else begin
      arm  <= 1'b0;
      done <= 1'b0;
      if (trig_cnt != '0) trig_cnt <= trig_cnt - 1'b1;
      if (settle != '0)   settle   <= settle - 1;
      unique case (state)
        S_IDLE: if (start) begin
          beam  <= '0;
          state <= (num_beams == '0) ? S_IDLE : S_WAIT;
        end
        S_WAIT: if (settle == '0 && trig_cnt == '0 && fft_ready && !cap_busy) begin
          arm   <= 1'b1;
          state <= S_CAPTURE;
        end
        S_CAPTURE: if (cap_done) begin
          trig_cnt   <= ($clog2(TRIG_W+1)+1)'(TRIG_W);
          settle     <= settle_cycles;
          trig_count <= trig_count + 1;
          if (beam == num_beams - 1'b1) begin
            state <= S_DRAIN;
          end else begin
            beam  <= beam + 1'b1;
            state <= S_WAIT;
          end
        end
        S_DRAIN: if (profiles == 32'(num_beams)) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
