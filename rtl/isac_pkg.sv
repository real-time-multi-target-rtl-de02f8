// isac_pkg: types and constants shared by the sensing transceiver.
//
// The OFDM numerology follows a 5G NR FR2 carrier of 275 resource blocks at
// 120 kHz subcarrier spacing (3300 active subcarriers, 400 MHz). The FFT size
// of 4096 and the normal cyclic prefix of 288 samples are the standard NR
// values for that numerology; they are not stated in the published system but follow
// from the 3GPP numerology it names. Sample and internal word widths are this
// design's own choices.
package isac_pkg;

  // 5G NR numerology (mu = 3, 275 RBs)
  localparam int unsigned N_FFT      = 4096;  // FFT size for 400 MHz at 120 kHz SCS
  localparam int unsigned CP_LEN     = 288;   // normal CP at N_FFT = 4096
  localparam int unsigned N_SC       = 3300;  // 275 RB x 12 subcarriers

  // Word widths
  localparam int unsigned SMP_W      = 16;    // RF data converter sample width
  localparam int unsigned DW         = 24;    // internal complex component width
  localparam int unsigned TW_W       = 18;    // twiddle factor width (Q1.17)
  localparam int unsigned IN_SHIFT   = 8;     // ADC sample -> internal word alignment

  // Complex sample as seen by the converters and the PS (re in the low half)
  typedef struct packed {
    logic signed [SMP_W-1:0] im;
    logic signed [SMP_W-1:0] re;
  } iq_t;

  // Internal complex word of the FFT datapath
  typedef struct packed {
    logic signed [DW-1:0] im;
    logic signed [DW-1:0] re;
  } cplx_t;

  // Saturate a wide signed value to DW bits
  function automatic logic signed [DW-1:0] sat_dw(input logic signed [47:0] x);
    if (x > 48'sd8388607)       return 24'sh7FFFFF;
    else if (x < -48'sd8388608) return 24'sh800000;
    else                        return x[DW-1:0];
  endfunction

  // Saturate a DW-bit value to a converter-width sample
  function automatic logic signed [SMP_W-1:0] sat_smp(input logic signed [DW-1:0] x);
    if (x > 24'sd32767)       return 16'sh7FFF;
    else if (x < -24'sd32768) return 16'sh8000;
    else                      return x[SMP_W-1:0];
  endfunction

endpackage
