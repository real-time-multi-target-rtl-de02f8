// fft_engine: memory-based radix-2 FFT / IFFT of N complex points.
//
// The receive chain uses two instances: one forward transform that performs
// the OFDM demodulation of a captured symbol (time samples -> subcarriers),
// and one inverse transform that turns the per-subcarrier channel estimate
// into the range profile. The published system states only that these transforms exist;
// the architecture here is this design's own, chosen for small area: a single
// decimation-in-time butterfly working in place on one N-word memory.
//
// Operation has three phases.
//   LOAD    in_ready = 1. N samples are accepted on in_valid/in_ready and
//           written to the memory in bit-reversed address order. The
//           direction (inverse = 1 for IFFT) is sampled with the first sample.
//   COMPUTE log2(N) stages of N/2 butterflies, one butterfly per clock, so
//           the transform takes N/2*log2(N) cycles (24576 for N = 4096).
//   UNLOAD  N results are offered in natural bin order on out_valid/out_ready,
//           out_last marks bin N-1. The stream may be stalled at any time.
// Every stage halves its outputs (rounding toward minus infinity), so both
// directions carry an overall scale of 1/N; butterfly outputs saturate.
// Twiddles exp(-j*2*pi*k/N) are computed at elaboration into a ROM; the
// inverse transform uses their conjugates.
module fft_engine
  import isac_pkg::*;
#(
  parameter int unsigned N      = isac_pkg::N_FFT,
  parameter int unsigned LOG2N  = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              inverse,     // 0: FFT, 1: IFFT (sampled with first input)
  // input stream
  input  logic              in_valid,
  output logic              in_ready,
  input  cplx_t             in_data,
  // output stream
  output logic              out_valid,
  input  logic              out_ready,
  output cplx_t             out_data,
  output logic              out_last,
  output logic              busy         // high in COMPUTE and UNLOAD
);

  typedef enum logic [1:0] {S_LOAD, S_COMPUTE, S_UNLOAD} state_t;
  state_t state;

  // Twiddle ROM, Q1.(TW_W-1), k = 0 .. N/2-1
  typedef logic signed [TW_W-1:0] tw_rom_t [N/2];
  function automatic tw_rom_t gen_tw(input bit sine);
    tw_rom_t t;
    real     scale, ang, v;
    scale = real'((1 << (TW_W - 1)) - 1);
    for (int k = 0; k < int'(N / 2); k++) begin
      ang  = 2.0 * 3.14159265358979323846 * real'(k) / real'(N);
      v    = sine ? -$sin(ang) : $cos(ang);
      v    = v * scale;
      t[k] = TW_W'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
    end
    return t;
  endfunction
  localparam tw_rom_t TW_RE = gen_tw(1'b0);  //  cos(2*pi*k/N)
  localparam tw_rom_t TW_IM = gen_tw(1'b1);  // -sin(2*pi*k/N)

  function automatic logic [LOG2N-1:0] bitrev(input logic [LOG2N-1:0] a);
    for (int i = 0; i < int'(LOG2N); i++) bitrev[i] = a[LOG2N-1-i];
  endfunction

  cplx_t mem [N];

  logic [LOG2N-1:0] cnt;        // load/unload index, butterfly index in compute
  logic [$clog2(LOG2N+1)-1:0] stage;  // 1 .. LOG2N
  logic             inv_q;

  // ---------------- butterfly address generation ----------------
  logic [LOG2N-1:0] bfly;       // butterfly number within a stage, 0 .. N/2-1
  logic [LOG2N-1:0] half_mask;  // (2^(stage-1)) - 1
  logic [LOG2N-1:0] k_in_grp;
  logic [LOG2N-1:0] addr_top, addr_bot;
  logic [LOG2N-2:0] tw_idx;

  always_comb begin
    bfly      = {1'b0, cnt[LOG2N-2:0]};
    half_mask = LOG2N'((1 << (stage - 1)) - 1);
    k_in_grp  = bfly & half_mask;
    addr_top  = ((bfly & ~half_mask) << 1) | k_in_grp;
    addr_bot  = addr_top | (half_mask + 1'b1);
    tw_idx    = (LOG2N-1)'(k_in_grp << (LOG2N - 32'(stage)));
  end

  // ---------------- butterfly datapath ----------------
  cplx_t a, b, y_top, y_bot;
  logic signed [TW_W-1:0] wr, wi;
  logic signed [DW+TW_W:0] pr, pi;
  logic signed [DW+1:0]   tr, ti;

  always_comb begin
    a  = mem[addr_top];
    b  = mem[addr_bot];
    wr = TW_RE[tw_idx];
    wi = inv_q ? -TW_IM[tw_idx] : TW_IM[tw_idx];
    pr = (DW+TW_W+1)'(b.re * wr) - (DW+TW_W+1)'(b.im * wi);
    pi = (DW+TW_W+1)'(b.re * wi) + (DW+TW_W+1)'(b.im * wr);
    tr = (DW+2)'(pr >>> (TW_W - 1));
    ti = (DW+2)'(pi >>> (TW_W - 1));
    y_top.re = sat_dw((48'(a.re) + 48'(tr)) >>> 1);
    y_top.im = sat_dw((48'(a.im) + 48'(ti)) >>> 1);
    y_bot.re = sat_dw((48'(a.re) - 48'(tr)) >>> 1);
    y_bot.im = sat_dw((48'(a.im) - 48'(ti)) >>> 1);
  end

  // ---------------- control ----------------
  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_UNLOAD);
  assign out_data  = mem[cnt];
  assign out_last  = (state == S_UNLOAD) && (cnt == LOG2N'(N - 1));
  assign busy      = (state != S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      stage <= 1;
      inv_q <= 1'b0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (cnt == '0) inv_q <= inverse;
          cnt <= cnt + 1'b1;
          if (cnt == LOG2N'(N - 1)) begin
            state <= S_COMPUTE;
            stage <= 1;
          end
        end
        S_COMPUTE: begin
          if (cnt[LOG2N-2:0] == '1) begin
            cnt <= '0;
            if (32'(stage) == LOG2N) state <= S_UNLOAD;
            else                stage <= stage + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_UNLOAD: if (out_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == LOG2N'(N - 1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // memory writes
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      mem[bitrev(cnt)] <= in_data;
    end else if (state == S_COMPUTE) begin
      mem[addr_top] <= y_top;
      mem[addr_bot] <= y_bot;
    end
  end

endmodule
